// tb_quantizer: checks the uniform and floating-point quantizer against real arithmetic.
//
// For random and corner inputs (zero, +-1.0, the extremes of the word) and every resolution
// 1..F+1, the expected level is worked out with real numbers:
//   uniform: q = 2**-b, Q(x) = sign(x) * floor(|x|/q + 1/2) * q
//   float:   |x| = 2**e * M with M in [1/2,1), Q(x) = sign(x) * 2**e * floor(M*2**b + 1/2) / 2**b
// saturated to the word's range; with the enable low the output must equal the input.
module tb_quantizer;
  import fft_pkg::*;

  localparam int unsigned W = 16;
  localparam int unsigned F = 14;

  logic signed [W-1:0] din, dout;
  logic                en;
  qmode_e              mode;
  logic [QBW-1:0]      bits;

  quantizer #(.W(W), .F(F)) dut (.*);

  int checks = 0, failures = 0;

  function automatic real expected(real x, qmode_e m, int b);
    real ax, q, e, r;
    ax = (x < 0.0) ? -x : x;
    if (ax == 0.0) return 0.0;
    if (m == Q_UNIFORM) begin
      q = 2.0 ** (-b);
      r = $floor(ax / q + 0.5) * q;
    end else begin
      e = 0.0;
      while (ax / (2.0 ** e) >= 1.0) e += 1.0;
      while (ax / (2.0 ** e) < 0.5) e -= 1.0;
      r = (2.0 ** e) * $floor(ax / (2.0 ** e) * (2.0 ** b) + 0.5) / (2.0 ** b);
    end
    if (r < ax && (m == Q_UNIFORM) && b >= int'(F)) r = ax;
    r = (x < 0.0) ? -r : r;
    if (r > real'((1 << (W - 1)) - 1) / real'(1 << F)) r = real'((1 << (W - 1)) - 1) / real'(1 << F);
    if (r < -real'(1 << (W - 1)) / real'(1 << F)) r = -real'(1 << (W - 1)) / real'(1 << F);
    return r;
  endfunction

  task automatic run(logic signed [W-1:0] v, logic e, qmode_e m, int b);
    real exp_v, got;
    din = v; en = e; mode = m; bits = QBW'(b);
    #1;
    got = real'(dout) / real'(1 << F);
    exp_v = e ? expected(real'(v) / real'(1 << F), m, b) : real'(v) / real'(1 << F);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20)
        $display("FAIL: in=%0d en=%0d mode=%s bits=%0d got %f expected %f", v, e, m.name(), b, got, exp_v);
    end
  endtask

  initial begin
    logic signed [W-1:0] corner [8] = '{16'sd0, 16'sd16384, -16'sd16384, 16'sd32767, -16'sd32768,
                                        16'sd1, -16'sd1, 16'sd11585};
    for (int b = 1; b <= int'(F) + 1; b++)
      foreach (corner[i]) begin
        run(corner[i], 1'b1, Q_UNIFORM, b);
        run(corner[i], 1'b1, Q_FLOAT, b);
        run(corner[i], 1'b0, Q_FLOAT, b);
      end
    for (int i = 0; i < 4000; i++) begin
      run(W'($urandom), 1'b1, qmode_e'(i % 2), 1 + (i / 2) % int'(F + 1));
      run(W'($signed($urandom_range(32768)) - 16384), 1'b1, qmode_e'(i % 2), 1 + (i / 2) % int'(F));
    end
    for (int i = 0; i < 200; i++) run(W'($urandom), 1'b0, qmode_e'(i % 2), i % 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
