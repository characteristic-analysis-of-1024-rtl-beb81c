// tb_fft_ifft_top: end-to-end test of the FFT/IFFT processor at a reduced size (N = 64).
//
// Random complex frames are pushed through the processor and every result is compared with a
// double-precision DFT (FFT frames) or inverse DFT (IFFT frames) of the same input, computed
// here. The error is measured as the RMS error divided by the RMS of the exact result.
// The frame list exercises every mechanism of the design and counts how often each happened:
//   FFT and IFFT frames, switching FFT/IFFT between consecutive frames, twiddle quantization
//   off / uniform / floating-point, two resolutions, frames sent back to back, an idle
//   interval between frames and gaps inside an input frame.
// Checks: every frame returns N results in natural order 0..N-1 with the right FFT/IFFT flag;
// unquantized error below 5e-4; quantized error larger at 3 bits than at 9 bits and larger
// than unquantized; latency from the last input sample to X[0] equal to LOG2N + N/2 + 3.
module tb_fft_ifft_top;
  import fft_pkg::*;

  localparam int unsigned LOG2N = 6;
  localparam int unsigned N     = 1 << LOG2N;
  localparam int unsigned IW    = 16;
  localparam int unsigned DW    = data_width(LOG2N, IW);
  localparam int          NF    = 9;
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

  fft_ifft_top #(.LOG2N(LOG2N), .IW(IW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real xr [NF][N], xi [NF][N];     // inputs
  real yr [NF][N], yi [NF][N];     // results from the design
  int  t_last [NF], t_first [NF];
  int  out_frame = -1, out_cnt = 0, in_frames_done = 0;
  real err [NF];

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
        ar = 2.0 * PI * real'((k * n) % int'(N)) / real'(N);
        rr += xr[f][n] * $cos(ar) - sgn * xi[f][n] * $sin(ar);
        ri += xi[f][n] * $cos(ar) + sgn * xr[f][n] * $sin(ar);
      end
      if (cfg[f].inverse) begin rr /= real'(N); ri /= real'(N); end
      num += (yr[f][k] - rr) ** 2 + (yi[f][k] - ri) ** 2;
      den += rr ** 2 + ri ** 2;
    end
    return $sqrt(num / den);
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    //            inverse q_en  q_mode     bits wait  gaps
    cfg[0] = '{1'b0, 1'b0, Q_UNIFORM, 14, 1'b0, 1'b0};
    cfg[1] = '{1'b1, 1'b0, Q_UNIFORM, 14, 1'b0, 1'b0};
    cfg[2] = '{1'b0, 1'b0, Q_UNIFORM, 14, 1'b0, 1'b1};
    cfg[3] = '{1'b0, 1'b1, Q_UNIFORM,  3, 1'b1, 1'b0};
    cfg[4] = '{1'b0, 1'b1, Q_FLOAT,    3, 1'b0, 1'b0};
    cfg[5] = '{1'b1, 1'b1, Q_UNIFORM,  3, 1'b0, 1'b0};
    cfg[6] = '{1'b0, 1'b1, Q_UNIFORM,  9, 1'b1, 1'b0};
    cfg[7] = '{1'b0, 1'b1, Q_FLOAT,    9, 1'b0, 1'b0};
    cfg[8] = '{1'b1, 1'b1, Q_FLOAT,    3, 1'b1, 1'b0};
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
    check(err[3] > err[6] && err[6] > err[0], "uniform: error falls as bits rise");
    check(err[4] > err[7] && err[7] > err[0], "float: error falls as bits rise");
    check(err[5] > err[1], "IFFT: quantized error above unquantized");
    check(err[8] > err[1], "IFFT: float quantized error above unquantized");
    check(!overflow, "no input overflow");

    $display("mechanisms: fft=%0d ifft=%0d switch=%0d q_off=%0d q_uniform=%0d q_float=%0d back_to_back=%0d idle=%0d input_gaps=%0d",
             n_fft, n_ifft, n_switch, n_qoff, n_quni, n_qflt, n_b2b, n_idle, n_gaps);
    check(n_fft > 0 && n_ifft > 0 && n_switch > 0 && n_qoff > 0 && n_quni > 0 && n_qflt > 0 &&
          n_b2b > 0 && n_idle > 0 && n_gaps > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
