// tb_bit_sweep: error of the 1024-point processor against twiddle-factor resolution.
//
// Runs, at the default size, one unquantized FFT and IFFT frame and then FFT and IFFT frames
// with uniform and with floating-point twiddle quantization at every resolution from 1 to 10
// bits, the range over which the error of the two quantizer characteristics is usually
// studied. Each result frame is compared with a double-precision DFT / inverse DFT; the
// relative RMS error of every frame is printed as a table. The resolution is static, so the
// pipeline is drained before each change. Checks: every frame complete and in order; for each
// direction and characteristic the error at 10 bits is below that at 5 bits, which is below
// that at 1 bit; the 10-bit error is below 5e-3 but above the unquantized error.
module tb_bit_sweep;
  import fft_pkg::*;

  localparam int unsigned LOG2N = LOG2N_DEF;
  localparam int unsigned N     = 1 << LOG2N;
  localparam int unsigned IW    = IW_DEF;
  localparam int unsigned DW    = data_width(LOG2N, IW);
  localparam int          NF    = 42;   // 2 unquantized + 2 characteristics x 2 directions x 10 resolutions
  localparam real         PI    = 3.14159265358979323846;

  typedef struct {
    bit     inverse;
    bit     q_en;
    qmode_e q_mode;
    int     bits;
    bit     wait_idle;   // let the pipeline drain before this frame
    bit     in_gaps;     // insert idle cycles inside the input frame
  } frame_cfg_t;

  frame_cfg_t cfg [NF];

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic                 inverse = 1'b0, q_en = 1'b0, in_valid = 1'b0;
  qmode_e               q_mode = Q_UNIFORM;
  logic [QBW-1:0]       q_bits [LOG2N];
  logic signed [IW-1:0] in_re = '0, in_im = '0;
  logic                 out_valid, out_sof, out_inverse, overflow;
  logic [LOG2N-1:0]     out_index;
  logic signed [DW-1:0] out_re, out_im;

  fft_ifft_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real xr [NF][N], xi [NF][N];     // inputs
  real yr [NF][N], yi [NF][N];     // results from the design
  int  t_last [NF], t_first [NF];
  int  out_frame = -1, out_cnt = 0, in_frames_done = 0;
  real err [NF];
  real ctab [N], stab [N];   // cos and sin of 2*pi*i/N
  initial for (int i = 0; i < int'(N); i++) begin
    ctab[i] = $cos(2.0 * PI * real'(i) / real'(N));
    stab[i] = $sin(2.0 * PI * real'(i) / real'(N));
  end

  // mechanism counters
  int n_fft = 0, n_ifft = 0, n_switch = 0, n_qoff = 0, n_quni = 0, n_qflt = 0;
  int n_b2b = 0, n_idle = 0, n_gaps = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- output monitor ----------------
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (out_sof) begin
        if (out_frame >= 0) check(out_cnt == N, $sformatf("frame %0d returned %0d results", out_frame, out_cnt));
        out_frame++;
        out_cnt = 0;
        t_first[out_frame] = cyc;
      end
      if (out_frame >= 0 && out_frame < NF) begin
        if (out_index != LOG2N'(out_cnt)) begin
          check(0, $sformatf("frame %0d: index %0d, expected %0d", out_frame, out_index, out_cnt));
        end
        if (out_inverse != cfg[out_frame].inverse) check(0, "FFT/IFFT flag of result");
        yr[out_frame][out_index] = real'(out_re) / real'(N);
        yi[out_frame][out_index] = real'(out_im) / real'(N);
        out_cnt++;
      end
    end
  end

  // ---------------- reference and error ----------------
  function automatic real rel_error(int f);
    real num = 0.0, den = 0.0, sgn, ar, ai, rr, ri;
    sgn = cfg[f].inverse ? 1.0 : -1.0;
    for (int k = 0; k < int'(N); k++) begin
      rr = 0.0; ri = 0.0;
      for (int n = 0; n < int'(N); n++) begin
        ar = real'((k * n) % int'(N));
        rr += xr[f][n] * ctab[int'(ar)] - sgn * xi[f][n] * stab[int'(ar)];
        ri += xi[f][n] * ctab[int'(ar)] + sgn * xr[f][n] * stab[int'(ar)];
      end
      if (cfg[f].inverse) begin rr /= real'(N); ri /= real'(N); end
      num += (yr[f][k] - rr) ** 2 + (yi[f][k] - ri) ** 2;
      den += rr ** 2 + ri ** 2;
    end
    return $sqrt(num / den);
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    cfg[0] = '{1'b0, 1'b0, Q_UNIFORM, 14, 1'b0, 1'b0};
    cfg[1] = '{1'b1, 1'b0, Q_UNIFORM, 14, 1'b0, 1'b1};
    // frame 2 + 20*inv + 10*mode + (b-1): resolution b, FFT then IFFT, uniform then float
    for (int inv = 0; inv < 2; inv++)
      for (int m = 0; m < 2; m++)
        for (int b = 1; b <= 10; b++)
          cfg[2 + 20 * inv + 10 * m + b - 1] = '{inv[0], 1'b1, qmode_e'(m), b, 1'b1, 1'b0};
    foreach (q_bits[s]) q_bits[s] = QBW'(cfg[0].bits);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++) begin
      if (cfg[f].wait_idle) begin
        // let the previous frame leave before the static resolution is changed
        wait (out_frame == f - 1 && out_cnt == int'(N));
        @(negedge clk);
        n_idle++;
      end else if (f > 0) begin
        n_b2b++;
      end
      foreach (q_bits[s]) q_bits[s] = QBW'(cfg[f].bits);
      if (f > 0 && cfg[f].inverse != cfg[f-1].inverse) n_switch++;
      if (cfg[f].inverse) n_ifft++; else n_fft++;
      if (!cfg[f].q_en) n_qoff++;
      else if (cfg[f].q_mode == Q_UNIFORM) n_quni++;
      else n_qflt++;
      if (cfg[f].in_gaps) n_gaps++;
      for (int n = 0; n < int'(N); n++) begin
        if (cfg[f].in_gaps && n % 7 == 3) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        inverse  = cfg[f].inverse;
        q_en     = cfg[f].q_en;
        q_mode   = cfg[f].q_mode;
        in_re    = IW'($signed($urandom_range(16000)) - 8000);
        in_im    = IW'($signed($urandom_range(16000)) - 8000);
        xr[f][n] = real'(in_re);
        xi[f][n] = real'(in_im);
        @(posedge clk);
        if (n == int'(N) - 1) t_last[f] = cyc;
        @(negedge clk);
      end
      in_valid = 1'b0;
    end
    wait (out_frame == NF - 1 && out_cnt == int'(N));
    repeat (5) @(negedge clk);

    for (int f = 0; f < NF; f++) begin
      err[f] = rel_error(f);
      $display("frame %0d: %s q_en=%0d mode=%s bits=%0d  relative RMS error %e  latency %0d",
               f, cfg[f].inverse ? "IFFT" : "FFT ", cfg[f].q_en, cfg[f].q_mode.name(),
               cfg[f].bits, err[f], t_first[f] - t_last[f]);
      if (!cfg[f].q_en) check(err[f] < 5e-4, $sformatf("frame %0d unquantized error %e", f, err[f]));
      check(t_first[f] - t_last[f] == int'(LOG2N + N / 2 + 3),
            $sformatf("frame %0d latency %0d", f, t_first[f] - t_last[f]));
    end
    check(out_cnt == int'(N), "last frame complete");
    for (int inv = 0; inv < 2; inv++)
      for (int m = 0; m < 2; m++) begin
        int base = 2 + 20 * inv + 10 * m;
        check(err[base + 9] < err[base + 4] && err[base + 4] < err[base],
              $sformatf("%s %s: error at 10 bits < 5 bits < 1 bit", inv ? "IFFT" : "FFT", m ? "float" : "uniform"));
        check(err[base + 9] < 5e-3, "error at 10 bits below 5e-3");
        check(err[base + 9] > err[inv], "quantized error above unquantized");
      end
    check(!overflow, "no input overflow");

    $display("mechanisms: fft=%0d ifft=%0d switch=%0d q_off=%0d q_uniform=%0d q_float=%0d back_to_back=%0d idle=%0d input_gaps=%0d",
             n_fft, n_ifft, n_switch, n_qoff, n_quni, n_qflt, n_b2b, n_idle, n_gaps);
    check(n_fft > 0 && n_ifft > 0 && n_switch > 0 && n_qoff > 0 && n_quni > 0 && n_qflt > 0 &&
          n_b2b > 0 && n_idle > 0 && n_gaps > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
