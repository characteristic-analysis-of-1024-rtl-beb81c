// delay_line: fixed delay of DEPTH clock cycles for a WIDTH-bit word.
//
// A plain shift register: every clock the word moves one place, so dout equals din from
// DEPTH cycles earlier. It runs every cycle with no enable, which is what the delay
// commutators of the FFT pipeline need (their timing is counted in clock cycles). The
// register contents are reset to zero so that nothing random ever leaves the line.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] sr [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) sr[i] <= '0;
    end else begin
      sr[0] <= din;
      for (int i = 1; i < int'(DEPTH); i++) sr[i] <= sr[i-1];
    end
  end

  assign dout = sr[DEPTH-1];
endmodule
