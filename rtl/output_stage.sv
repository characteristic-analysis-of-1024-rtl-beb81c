// output_stage: merges the two result paths of the last stage into one serial stream.
//
// The last butterfly stage delivers, in N/2 consecutive clocks, the pairs (X[k], X[k + N/2])
// for k = 0..N/2-1. This block sends X[k] straight out (one register) and stores X[k + N/2]
// in a half-frame buffer, which it then plays out during the next N/2 clocks. The result is
// one sample per clock in natural order X[0] .. X[N-1], with out_index = k, out_sof on X[0]
// and out_ctrl the controls of the frame (telling FFT from IFFT results).
// Timing: out X[0] one clock after the first pair; the frame ends N clocks later. A new frame
// may begin as soon as the previous one has been played out, which is always the case when
// frames enter the processor at most one sample per clock.
//
// The paper names an output stage and a multiplexer after the butterflies; this serializer
// and its buffer are this design's way of providing them.
module output_stage
  import fft_pkg::*;
#(
  parameter int unsigned LOG2N = 10,
  parameter int unsigned DW    = 37
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_sof,
  input  ctrl_t                   in_ctrl,
  input  logic signed [DW-1:0]    c_re, c_im,
  input  logic signed [DW-1:0]    d_re, d_im,
  output logic                    out_valid,
  output logic                    out_sof,
  output ctrl_t                   out_ctrl,
  output logic [LOG2N-1:0]        out_index,
  output logic signed [DW-1:0]    out_re,
  output logic signed [DW-1:0]    out_im
);
  localparam int unsigned H     = (1 << LOG2N) / 2;
  localparam int unsigned TBITS = LOG2N - 1;

  logic [2*DW-1:0]  hold [H];
  logic [TBITS-1:0] in_cnt, cur, dr_cnt;
  logic             draining;
  ctrl_t            frame_ctrl;

  assign cur = in_sof ? '0 : in_cnt;

  always_ff @(posedge clk) begin
    if (in_valid) hold[cur] <= {d_re, d_im};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt     <= '0;
      dr_cnt     <= '0;
      draining   <= 1'b0;
      frame_ctrl <= '0;
      out_valid  <= 1'b0;
      out_sof    <= 1'b0;
      out_ctrl   <= '0;
      out_index  <= '0;
      out_re     <= '0;
      out_im     <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid) begin
        // first half: X[k] straight through
        in_cnt    <= cur + 1'b1;
        out_valid <= 1'b1;
        out_sof   <= in_sof;
        out_ctrl  <= in_ctrl;
        out_index <= {1'b0, cur};
        out_re    <= c_re;
        out_im    <= c_im;
        if (in_sof) frame_ctrl <= in_ctrl;
        if (cur == TBITS'(H - 1)) begin
          draining <= 1'b1;
          dr_cnt   <= '0;
        end
      end else if (draining) begin
        // second half: X[N/2 + k] from the buffer
        out_valid <= 1'b1;
        out_ctrl  <= frame_ctrl;
        out_index <= {1'b1, dr_cnt};
        {out_re, out_im} <= hold[dr_cnt];
        dr_cnt <= dr_cnt + 1'b1;
        if (dr_cnt == TBITS'(H - 1)) draining <= 1'b0;
      end
    end
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && draining))
    else $error("output_stage: new frame arrived before the previous one was played out");
endmodule
