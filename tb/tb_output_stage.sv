// tb_output_stage: checks that two result paths are merged into natural order.
//
// Frames of 8 pairs (X[k], X[k+8]) with known tags are fed in, back to back at the fastest
// legal rate (a new frame every 16 clocks) and once after a gap. The bench expects 16
// consecutive outputs per frame with out_index 0..15, the values X[0..15] in that order,
// out_sof only on X[0], the frame's controls, and X[0] one clock after the first pair.
module tb_output_stage;
  import fft_pkg::*;

  localparam int unsigned LOG2N = 4, DW = 24;
  localparam int unsigned N = 1 << LOG2N, H = N / 2;
  localparam int NF = 3;

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic                 in_valid = 1'b0, in_sof = 1'b0;
  ctrl_t                in_ctrl = '0;
  logic signed [DW-1:0] c_re = '0, c_im = '0, d_re = '0, d_im = '0;
  logic                 out_valid, out_sof;
  ctrl_t                out_ctrl;
  logic [LOG2N-1:0]     out_index;
  logic signed [DW-1:0] out_re, out_im;

  output_stage #(.LOG2N(LOG2N), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int frame_out = -1, k_out = 0, first_in [NF], first_out [NF];

  function automatic int tag(int f, int k);
    return 100 * f + k;
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
      if (out_sof) begin
        if (frame_out >= 0) expect_eq(k_out, N, "frame length");
        frame_out++;
        k_out = 0;
        first_out[frame_out] = cyc;
      end else if (k_out == 0) begin
        expect_eq(1, 0, "missing start of frame");
      end
      expect_eq(out_index, k_out, "index");
      expect_eq(out_re, tag(frame_out, k_out), "re");
      expect_eq(out_im, -tag(frame_out, k_out), "im");
      expect_eq(out_ctrl, ctrl_t'(3'(frame_out + 1)), "ctrl");
      k_out++;
    end else if (frame_out >= 0 && k_out != 0 && k_out != int'(N)) begin
      expect_eq(1, 0, "gap inside output frame");
    end
  end

  task automatic send(int f);
    for (int k = 0; k < int'(H); k++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_sof   = (k == 0);
      in_ctrl  = ctrl_t'(3'(f + 1));
      c_re = DW'(tag(f, k));      c_im = DW'(-tag(f, k));
      d_re = DW'(tag(f, k + H));  d_im = DW'(-tag(f, k + H));
      if (k == 0) first_in[f] = cyc;
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_sof   = 1'b0;
    in_ctrl  = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    send(0);
    repeat (H - 1) @(negedge clk);   // next frame N clocks after the previous one began
    send(1);
    repeat (H + 5) @(negedge clk);
    send(2);
    repeat (N + 4) @(negedge clk);
    expect_eq(frame_out, NF - 1, "frames out");
    expect_eq(k_out, N, "last frame length");
    for (int f = 0; f < NF; f++) expect_eq(first_out[f] - first_in[f], 1, "latency");
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
