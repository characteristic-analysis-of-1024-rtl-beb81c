// tb_butterfly: random butterflies compared with real-number arithmetic.
//
// a, b and W are drawn at random (W on the unit circle, rounded to TF fraction bits as the
// twiddle tables hold it). Expected y0 = a + W*b and y1 = a - W*b are computed in real
// numbers; the design's rounding of W*b to the data LSB allows at most 1 LSB of difference.
// Results must appear exactly one clock after the inputs, with the side band (valid,
// start of frame, control) delayed by the same clock.
module tb_butterfly;
  import fft_pkg::*;

  localparam int unsigned DW = 37, TW = 16, TF = 14;
  localparam real PI = 3.14159265358979323846;

  logic                 clk = 1'b0, rst_n = 1'b0;
  logic                 in_valid = 1'b0, in_sof = 1'b0;
  ctrl_t                in_ctrl = '0;
  logic signed [DW-1:0] a_re = '0, a_im = '0, b_re = '0, b_im = '0;
  logic signed [TW-1:0] w_re = '0, w_im = '0;
  logic                 out_valid, out_sof;
  ctrl_t                out_ctrl;
  logic signed [DW-1:0] y0_re, y0_im, y1_re, y1_im;

  butterfly #(.DW(DW), .TW(TW), .TF(TF)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic near(real got, real exp_v, string what);
    checks++;
    if (got - exp_v > 1.0 || exp_v - got > 1.0) begin
      failures++;
      $display("FAIL: %s got %f expected %f", what, got, exp_v);
    end
  endtask

  function automatic logic signed [DW-1:0] rnd_data();
    longint v;
    v = longint'({$urandom, $urandom}) >>> 29;   // about +-2**34
    return DW'(v);
  endfunction

  initial begin
    real ang, wr, wi, ar, ai, br, bi, pr, pi_;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ang  = 2.0 * PI * real'($urandom_range(1023)) / 1024.0;
      w_re = TW'($rtoi($floor($cos(ang) * 16384.0 + 0.5)));
      w_im = TW'($rtoi($floor(-$sin(ang) * 16384.0 + 0.5)));
      a_re = rnd_data(); a_im = rnd_data(); b_re = rnd_data(); b_im = rnd_data();
      in_valid = 1'b1;
      in_sof   = (i % 3 == 0);
      in_ctrl  = ctrl_t'(3'(i));
      ar = real'(a_re); ai = real'(a_im); br = real'(b_re); bi = real'(b_im);
      wr = real'(w_re) / 16384.0; wi = real'(w_im) / 16384.0;
      pr = br * wr - bi * wi;
      pi_ = br * wi + bi * wr;
      @(posedge clk);
      #1;  // one clock later the results must be there
      checks++;
      if (!(out_valid && out_sof == (i % 3 == 0) && out_ctrl == ctrl_t'(3'(i)))) begin
        failures++;
        $display("FAIL: side band at %0d", i);
      end
      near(real'(y0_re), ar + pr, "y0_re");
      near(real'(y0_im), ai + pi_, "y0_im");
      near(real'(y1_re), ar - pr, "y1_re");
      near(real'(y1_im), ai - pi_, "y1_im");
    end
    @(negedge clk);
    in_valid = 1'b0;
    @(posedge clk);
    #1;
    checks++;
    if (out_valid) begin failures++; $display("FAIL: valid not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
