// tb_fft_stage: one complete pipeline stage (stage 2 of a 16-point transform: butterfly span 4,
// twiddles W_8^i, shuffler delay 4).
//
// Random pairs are sent through the stage in four frames: FFT without quantization, IFFT
// without quantization, FFT with uniform and FFT with floating-point twiddle quantization at
// 2 bits. The expected outputs are computed here: the twiddle exp(-j*pi*i/4) (conjugated for
// the IFFT) is quantized with the textbook formulas in real numbers, the butterfly is done in
// real numbers, and the results are re-ordered into the next stage's pairing. Each value must
// be within 1 LSB; the first output pair must leave 1 + 4 clocks after the first input pair.
module tb_fft_stage;
  import fft_pkg::*;

  localparam int unsigned LOG2N = 4, STAGE = 2, DW = 30, TW = 16, TF = 14;
  localparam int unsigned P = 1 << (LOG2N - 1), D = 1 << STAGE;
  localparam real PI = 3.14159265358979323846;
  localparam int NF = 4;

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic [QBW-1:0]       q_bits = QBW'(2);
  logic                 in_valid = 1'b0, in_sof = 1'b0;
  ctrl_t                in_ctrl = '0;
  logic signed [DW-1:0] a_re = '0, a_im = '0, b_re = '0, b_im = '0;
  logic                 out_valid, out_sof;
  ctrl_t                out_ctrl;
  logic signed [DW-1:0] c_re, c_im, d_re, d_im;

  fft_stage #(.LOG2N(LOG2N), .STAGE(STAGE), .DW(DW), .TW(TW), .TF(TF), .LAST(1'b0)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  ctrl_t fctrl [NF];
  real   y0r [NF][P], y0i [NF][P], y1r [NF][P], y1i [NF][P];
  int    sof_in [NF], sof_out [NF];
  int    frame_out = -1, tau = 0;

  function automatic real quant(real x, bit en, qmode_e m, int b);
    real ax, e;
    if (!en) return real'($rtoi($floor(x * 16384.0 + 0.5))) / 16384.0;
    x  = real'($rtoi($floor(x * 16384.0 + 0.5))) / 16384.0;   // table value first
    ax = (x < 0.0) ? -x : x;
    if (ax == 0.0) return 0.0;
    if (m == Q_UNIFORM) ax = $floor(ax * (2.0 ** b) + 0.5) / (2.0 ** b);
    else begin
      e = 0.0;
      while (ax / (2.0 ** e) >= 1.0) e += 1.0;
      while (ax / (2.0 ** e) < 0.5) e -= 1.0;
      ax = (2.0 ** e) * $floor(ax / (2.0 ** e) * (2.0 ** b) + 0.5) / (2.0 ** b);
    end
    return (x < 0.0) ? -ax : ax;
  endfunction

  task automatic near(real got, real exp_v, string what);
    checks++;
    if (got - exp_v > 1.0 || exp_v - got > 1.0) begin
      failures++;
      $display("FAIL: %s got %f expected %f", what, got, exp_v);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int p, tc, td;
      real er0, ei0, er1, ei1;
      if (out_sof) begin
        frame_out++;
        tau = 0;
        sof_out[frame_out] = cyc;
      end
      p  = (tau >> STAGE) & 1;
      tc = tau & ~int'(D);
      td = tau | int'(D);
      er0 = p ? y1r[frame_out][tc] : y0r[frame_out][tc];
      ei0 = p ? y1i[frame_out][tc] : y0i[frame_out][tc];
      er1 = p ? y1r[frame_out][td] : y0r[frame_out][td];
      ei1 = p ? y1i[frame_out][td] : y0i[frame_out][td];
      near(real'(c_re), er0, $sformatf("frame %0d tau %0d c_re", frame_out, tau));
      near(real'(c_im), ei0, $sformatf("frame %0d tau %0d c_im", frame_out, tau));
      near(real'(d_re), er1, $sformatf("frame %0d tau %0d d_re", frame_out, tau));
      near(real'(d_im), ei1, $sformatf("frame %0d tau %0d d_im", frame_out, tau));
      checks++;
      if (out_ctrl != fctrl[frame_out]) begin failures++; $display("FAIL: ctrl"); end
      tau++;
    end
  end

  initial begin
    real wr, wi, ang, pr, pim;
    fctrl[0] = '{inverse: 1'b0, q_en: 1'b0, q_mode: Q_UNIFORM};
    fctrl[1] = '{inverse: 1'b1, q_en: 1'b0, q_mode: Q_UNIFORM};
    fctrl[2] = '{inverse: 1'b0, q_en: 1'b1, q_mode: Q_UNIFORM};
    fctrl[3] = '{inverse: 1'b0, q_en: 1'b1, q_mode: Q_FLOAT};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++) begin
      for (int t = 0; t < int'(P); t++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_sof   = (t == 0);
        in_ctrl  = fctrl[f];
        a_re = DW'($signed($urandom_range(2000000)) - 1000000);
        a_im = DW'($signed($urandom_range(2000000)) - 1000000);
        b_re = DW'($signed($urandom_range(2000000)) - 1000000);
        b_im = DW'($signed($urandom_range(2000000)) - 1000000);
        ang  = PI * real'(t % int'(D)) / real'(D);
        wr   = quant($cos(ang), fctrl[f].q_en, fctrl[f].q_mode, 2);
        wi   = quant($sin(ang), fctrl[f].q_en, fctrl[f].q_mode, 2);
        if (!fctrl[f].inverse) wi = -wi;
        pr  = real'(b_re) * wr - real'(b_im) * wi;
        pim = real'(b_re) * wi + real'(b_im) * wr;
        y0r[f][t] = real'(a_re) + pr;  y0i[f][t] = real'(a_im) + pim;
        y1r[f][t] = real'(a_re) - pr;  y1i[f][t] = real'(a_im) - pim;
        if (t == 0) sof_in[f] = cyc;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (3 * D) @(negedge clk);
    checks++;
    if (frame_out != NF - 1 || tau != int'(P)) begin
      failures++;
      $display("FAIL: %0d frames came out", frame_out + 1);
    end
    for (int f = 0; f < NF; f++) begin
      checks++;
      if (sof_out[f] - sof_in[f] != int'(D) + 1) begin
        failures++;
        $display("FAIL: latency %0d", sof_out[f] - sof_in[f]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
