// tb_shuffler: checks the re-pairing done by the delay commutator.
//
// With D = 2**LOG2D, every input element is tagged with its frame, time index t and path p
// (tag = 1000*frame + 2*t + p). At output time tau the expected tags are worked out from the
// definition of the next stage's pairing: the upper output holds (t = tau with bit LOG2D
// cleared, p = bit LOG2D of tau), the lower output (t = tau with bit LOG2D set, same p).
// Frames are sent back to back and after a gap; the side band must be delayed by D clocks.
module tb_shuffler;
  import fft_pkg::*;

  localparam int unsigned DW = 20, LOG2D = 2, TBITS = 4;
  localparam int unsigned D = 1 << LOG2D, P = 1 << TBITS;

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic                 in_valid = 1'b0, in_sof = 1'b0;
  ctrl_t                in_ctrl = '0;
  logic signed [DW-1:0] a_re = '0, a_im = '0, b_re = '0, b_im = '0;
  logic                 out_valid, out_sof;
  ctrl_t                out_ctrl;
  logic signed [DW-1:0] c_re, c_im, d_re, d_im;

  shuffler #(.DW(DW), .LOG2D(LOG2D), .TBITS(TBITS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0, sof_in_cyc [$], frame_out = -1, tau = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int tag(int f, int t, int p);
    return 1000 * f + 2 * t + p;
  endfunction

  always @(posedge clk) begin
    if (in_valid && in_sof) sof_in_cyc.push_back(cyc);
    if (rst_n && out_valid) begin
      int p, e_c, e_d;
      if (out_sof) begin
        frame_out++;
        tau = 0;
        checks++;
        if (cyc - sof_in_cyc.pop_front() != int'(D)) begin
          failures++;
          $display("FAIL: latency");
        end
      end
      p   = (tau >> LOG2D) & 1;
      e_c = tag(frame_out, tau & ~int'(D), p);
      e_d = tag(frame_out, tau | int'(D), p);
      checks++;
      if (c_re != DW'(e_c) || d_re != DW'(e_d) || c_im != DW'(-e_c) || d_im != DW'(-e_d) ||
          out_ctrl != ctrl_t'(3'(frame_out))) begin
        failures++;
        $display("FAIL: frame %0d tau %0d got %0d/%0d expected %0d/%0d", frame_out, tau, c_re, d_re, e_c, e_d);
      end
      tau++;
    end
  end

  task automatic send_frame(int f);
    for (int t = 0; t < int'(P); t++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_sof   = (t == 0);
      in_ctrl  = ctrl_t'(3'(f));
      a_re = DW'(tag(f, t, 0)); a_im = DW'(-tag(f, t, 0));
      b_re = DW'(tag(f, t, 1)); b_im = DW'(-tag(f, t, 1));
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_sof   = 1'b0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    fork
      begin
        // frames 0 and 1 back to back
        for (int t = 0; t < 2 * int'(P); t++) begin
          @(negedge clk);
          in_valid = 1'b1;
          in_sof   = (t % int'(P) == 0);
          in_ctrl  = ctrl_t'(3'(t / int'(P)));
          a_re = DW'(tag(t / int'(P), t % int'(P), 0)); a_im = DW'(-tag(t / int'(P), t % int'(P), 0));
          b_re = DW'(tag(t / int'(P), t % int'(P), 1)); b_im = DW'(-tag(t / int'(P), t % int'(P), 1));
        end
        @(negedge clk);
        in_valid = 1'b0;
        repeat (7) @(negedge clk);
        send_frame(2);
      end
    join
    repeat (3 * D) @(negedge clk);
    checks++;
    if (frame_out != 2 || tau != int'(P)) begin
      failures++;
      $display("FAIL: %0d frames / %0d pairs came out", frame_out + 1, tau);
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
