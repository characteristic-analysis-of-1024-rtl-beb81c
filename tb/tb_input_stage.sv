// tb_input_stage: checks frame collection, IFFT scaling and the bit-reversed two-path order.
//
// Three 16-sample frames are written: an FFT frame, an IFFT frame straight after it, and an
// FFT frame with idle cycles inside. For every frame the stage must emit 8 consecutive pairs
// where pair t holds x[r] on the upper and x[r + 8] on the lower path, r being the 3-bit
// reversal of t (computed here bit by bit), each value multiplied by 16 for the FFT and left
// as is for the IFFT, with the frame's controls attached. The first pair must be seen 3 clock
// edges after the edge that took the last sample (2 register stages plus this bench sampling
// at the following edge).
module tb_input_stage;
  import fft_pkg::*;

  localparam int unsigned LOG2N = 4, IW = 16;
  localparam int unsigned N = 1 << LOG2N, H = N / 2;
  localparam int unsigned DW = data_width(LOG2N, IW);
  localparam int NF = 3;

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic                 in_valid = 1'b0;
  logic signed [IW-1:0] in_re = '0, in_im = '0;
  ctrl_t                in_ctrl = '0;
  logic                 out_valid, out_sof, overflow;
  ctrl_t                out_ctrl;
  logic signed [DW-1:0] a_re, a_im, b_re, b_im;

  input_stage #(.LOG2N(LOG2N), .IW(IW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int    xr [NF][N], xi [NF][N];
  ctrl_t fctrl [NF];
  int    last_in [NF], first_out [NF];
  int    frame_out = -1, t_out = 0, burst = 0;

  function automatic int rev3(int t);
    return ((t & 1) << 2) | (t & 2) | ((t >> 2) & 1);
  endfunction

  task automatic expect_eq(longint got, longint exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL: %s got %0d expected %0d", what, got, exp_v);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint sc;
      int r;
      if (out_sof) begin
        frame_out++;
        t_out = 0;
        burst = 0;
        first_out[frame_out] = cyc;
      end
      sc = fctrl[frame_out].inverse ? 1 : longint'(N);
      r  = rev3(t_out);
      expect_eq(a_re, sc * xr[frame_out][r],     $sformatf("f%0d t%0d a_re", frame_out, t_out));
      expect_eq(a_im, sc * xi[frame_out][r],     $sformatf("f%0d t%0d a_im", frame_out, t_out));
      expect_eq(b_re, sc * xr[frame_out][r + 8], $sformatf("f%0d t%0d b_re", frame_out, t_out));
      expect_eq(b_im, sc * xi[frame_out][r + 8], $sformatf("f%0d t%0d b_im", frame_out, t_out));
      expect_eq(out_ctrl, fctrl[frame_out], "ctrl");
      t_out++;
      burst++;
    end else if (rst_n && burst != 0) begin
      expect_eq(burst, H, "burst length");
      burst = 0;
    end
  end

  initial begin
    fctrl[0] = '{inverse: 1'b0, q_en: 1'b1, q_mode: Q_FLOAT};
    fctrl[1] = '{inverse: 1'b1, q_en: 1'b0, q_mode: Q_UNIFORM};
    fctrl[2] = '{inverse: 1'b0, q_en: 1'b1, q_mode: Q_UNIFORM};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++) begin
      for (int n = 0; n < int'(N); n++) begin
        if (f == 2 && n % 3 == 1) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        in_ctrl  = fctrl[f];
        in_re    = IW'($urandom);
        in_im    = IW'($urandom);
        xr[f][n] = int'(in_re);
        xi[f][n] = int'(in_im);
        @(posedge clk);
        if (n == int'(N) - 1) last_in[f] = cyc;
        @(negedge clk);
        in_valid = 1'b0;
        in_ctrl  = '0;
      end
    end
    repeat (20) @(negedge clk);
    expect_eq(frame_out, NF - 1, "frames out");
    for (int f = 0; f < NF; f++) expect_eq(first_out[f] - last_in[f], 3, $sformatf("latency f%0d", f));
    expect_eq(overflow, 0, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
