// tb_twiddle_gen: checks every entry of two twiddle tables (span 16 and span 512, the last
// stage of a 1024-point transform) against cos(pi*i/L) and sin(pi*i/L) computed here.
// Each entry must lie within half an LSB (plus real-rounding slack) of the exact value.
module tb_twiddle_gen;
  localparam int unsigned TW = 16, TF = 14;
  localparam real PI = 3.14159265358979323846;

  logic [3:0]           idx_a;
  logic signed [TW-1:0] cos_a, sin_a;
  logic [8:0]           idx_b;
  logic signed [TW-1:0] cos_b, sin_b;

  twiddle_gen #(.LOG2L(4), .TW(TW), .TF(TF)) dut_a (.idx(idx_a), .cos_o(cos_a), .sin_o(sin_a));
  twiddle_gen #(.LOG2L(9), .TW(TW), .TF(TF)) dut_b (.idx(idx_b), .cos_o(cos_b), .sin_o(sin_b));

  int checks = 0, failures = 0;

  task automatic cmp(logic signed [TW-1:0] got, real exact, string what);
    real d;
    d = real'(got) - exact * real'(1 << TF);
    checks++;
    if (d > 0.5001 || d < -0.5001) begin
      failures++;
      $display("FAIL: %s got %0d expected %f", what, got, exact * real'(1 << TF));
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) begin
      idx_a = 4'(i);
      #1;
      cmp(cos_a, $cos(PI * i / 16.0), $sformatf("L=16 cos[%0d]", i));
      cmp(sin_a, $sin(PI * i / 16.0), $sformatf("L=16 sin[%0d]", i));
    end
    for (int i = 0; i < 512; i++) begin
      idx_b = 9'(i);
      #1;
      cmp(cos_b, $cos(PI * i / 512.0), $sformatf("L=512 cos[%0d]", i));
      cmp(sin_b, $sin(PI * i / 512.0), $sformatf("L=512 sin[%0d]", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
