// shuffler: delay-switch-delay commutator between two successive butterfly units.
//
// The butterfly of stage s emits, at time t, the pair of frame positions (m, m + 2**s)
// on its upper (A) and lower (B) output. The next stage needs the pairs (m, m + 2**(s+1)).
// With D = 2**s this block exchanges the path bit with bit s of the time index:
//   B is delayed by D cycles; when bit s of the time index is 1 the two paths are crossed,
//   otherwise they pass straight; then the upper path is delayed by D cycles.
// Pairs leave in the same order they would have entered, D cycles later:
//   out at time tau+D:  A' = element (time tau with bit s cleared, path bit = tau[s])
//                       B' = element (time tau with bit s set,     path bit = tau[s])
// The valid, start-of-frame and control side band is delayed by D as well.
//
// Timing rules: a frame is N/2 consecutive valid pairs, marked by in_sof on its first pair.
// Frames may follow back to back or with gaps between them, never with a gap inside.
// The time index restarts at in_sof; while idle the paths pass straight.
//
// A shuffling unit between two butterfly units follows the paper; the delay commutator form
// (the classic multi-path delay commutator) is this design's choice of how to build it.
module shuffler
  import fft_pkg::*;
#(
  parameter int unsigned DW    = 37,
  parameter int unsigned LOG2D = 2,      // D = 2**LOG2D, the stage index s
  parameter int unsigned TBITS = 9       // width of the time index (LOG2N - 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  ctrl_t                in_ctrl,
  input  logic signed [DW-1:0] a_re, a_im,
  input  logic signed [DW-1:0] b_re, b_im,
  output logic                 out_valid,
  output logic                 out_sof,
  output ctrl_t                out_ctrl,
  output logic signed [DW-1:0] c_re, c_im,
  output logic signed [DW-1:0] d_re, d_im
);
  localparam int unsigned D  = 1 << LOG2D;
  localparam int unsigned SW = 2 + $bits(ctrl_t);

  logic [TBITS-1:0] t_q, t_cur;
  logic             swap;
  logic [2*DW-1:0]  bd, su, sl, su_d;

  // time index of the pair now at the input
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        t_q <= '0;
    else if (in_valid) t_q <= in_sof ? TBITS'(1) : t_q + 1'b1;
  end
  assign t_cur = in_sof ? '0 : t_q;
  assign swap  = in_valid && t_cur[LOG2D];

  delay_line #(.WIDTH(2*DW), .DEPTH(D)) u_dly_b (
    .clk, .rst_n, .din({b_re, b_im}), .dout(bd));

  always_comb begin
    su = swap ? bd : {a_re, a_im};
    sl = swap ? {a_re, a_im} : bd;
  end

  delay_line #(.WIDTH(2*DW), .DEPTH(D)) u_dly_a (
    .clk, .rst_n, .din(su), .dout(su_d));

  delay_line #(.WIDTH(SW), .DEPTH(D)) u_dly_s (
    .clk, .rst_n, .din({in_valid, in_valid & in_sof, in_ctrl}),
    .dout({out_valid, out_sof, out_ctrl}));

  assign {c_re, c_im} = su_d;
  assign {d_re, d_im} = sl;
endmodule
