// input_stage: serial sample input, IFFT input scaling and bit-reversed two-path demux.
//
// Samples arrive serially, one complex IW-bit sample per clock at most (in_valid), in natural
// order x[0], x[1], ... x[N-1]; every N valid samples form one frame. The controls (FFT/IFFT,
// quantizer enable and characteristic) are sampled with the first sample of each frame.
// Frames are written into one half of a ping-pong buffer while the other half is read, so
// input may be continuous.
//
// Once a frame is complete it is read out in N/2 consecutive clocks as pairs: at time t
// (0..N/2-1) the upper path carries x[r] and the lower path x[r + N/2], with r the (LOG2N-1)-bit
// bit-reversal of t. That is the order in which the first decimation-in-time stage combines
// positions 2t and 2t+1 of the bit-reversed frame. To allow both reads in one clock each
// buffer is split into a lower and an upper half-frame bank.
//
// Each value leaves as a DW-bit number with LOG2N fraction bits: for the FFT x itself
// (x << LOG2N), for the IFFT x/N (x unshifted), which is the input scaling the inverse
// transform needs. out_sof marks the first pair of a frame and out_ctrl carries its controls.
// Latency: the first pair leaves 2 clocks after the last sample of the frame was accepted.
//
// The input scaling for the IFFT, the routing index and the demultiplexing into two paths
// follow the paper. The ping-pong buffer, the bank split and the timing are this design's.
module input_stage
  import fft_pkg::*;
#(
  parameter int unsigned LOG2N = 10,
  parameter int unsigned IW    = 16,
  parameter int unsigned DW    = 37
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_re,
  input  logic signed [IW-1:0] in_im,
  input  ctrl_t                in_ctrl,
  output logic                 out_valid,
  output logic                 out_sof,
  output ctrl_t                out_ctrl,
  output logic signed [DW-1:0] a_re, a_im,
  output logic signed [DW-1:0] b_re, b_im,
  output logic                 overflow     // a frame arrived while both buffers were full
);
  localparam int unsigned N     = 1 << LOG2N;
  localparam int unsigned H     = N / 2;
  localparam int unsigned TBITS = LOG2N - 1;

  typedef logic [2*IW-1:0] word_t;

  // mem[buffer][half-frame bank][address]
  word_t mem [2][2][H];

  logic [LOG2N-1:0] wr_cnt;
  logic             wr_buf;
  logic [1:0]       full;
  ctrl_t            buf_ctrl [2];

  logic             rd_active, rd_buf;
  logic [TBITS-1:0] rd_cnt, rd_addr;
  logic             rd_sof;
  logic             start;

  function automatic logic [TBITS-1:0] bitrev(logic [TBITS-1:0] v);
    for (int i = 0; i < int'(TBITS); i++) bitrev[i] = v[TBITS-1-i];
  endfunction

  // ---------------- write side ----------------
  always_ff @(posedge clk) begin
    if (in_valid) mem[wr_buf][wr_cnt[LOG2N-1]][wr_cnt[LOG2N-2:0]] <= {in_re, in_im};
  end

  assign start = !rd_active && full[rd_buf];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_cnt      <= '0;
      wr_buf      <= 1'b0;
      full        <= '0;
      buf_ctrl[0] <= '0;
      buf_ctrl[1] <= '0;
      overflow    <= 1'b0;
    end else begin
      if (in_valid) begin
        if (wr_cnt == '0) begin
          buf_ctrl[wr_buf] <= in_ctrl;
          if (full[wr_buf]) overflow <= 1'b1;
        end
        wr_cnt <= wr_cnt + 1'b1;
        if (wr_cnt == LOG2N'(N - 1)) begin
          full[wr_buf] <= 1'b1;
          wr_buf       <= ~wr_buf;
        end
      end
      if (rd_active && rd_cnt == TBITS'(H - 1)) full[rd_buf] <= 1'b0;
    end
  end

  // ---------------- read side ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_active <= 1'b0;
      rd_buf    <= 1'b0;
      rd_cnt    <= '0;
    end else if (start) begin
      rd_active <= 1'b1;
      rd_cnt    <= '0;
    end else if (rd_active) begin
      rd_cnt <= rd_cnt + 1'b1;
      if (rd_cnt == TBITS'(H - 1)) begin
        rd_active <= 1'b0;
        rd_buf    <= ~rd_buf;
      end
    end
  end

  assign rd_addr = bitrev(rd_cnt);
  assign rd_sof  = rd_active && rd_cnt == '0;

  word_t lo_q, hi_q;
  logic  rd_v_q, rd_sof_q;
  ctrl_t rd_ctrl_q;

  always_ff @(posedge clk) begin
    lo_q <= mem[rd_buf][0][rd_addr];
    hi_q <= mem[rd_buf][1][rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v_q    <= 1'b0;
      rd_sof_q  <= 1'b0;
      rd_ctrl_q <= '0;
    end else begin
      rd_v_q    <= rd_active;
      rd_sof_q  <= rd_sof;
      rd_ctrl_q <= buf_ctrl[rd_buf];
    end
  end

  // format and scale: FFT -> x * 2**LOG2N (x in the internal format), IFFT -> x (= x/N)
  function automatic logic signed [DW-1:0] fmt(logic signed [IW-1:0] x, logic inv);
    logic signed [DW-1:0] v;
    v = DW'(x);
    return inv ? v : (v <<< LOG2N);
  endfunction

  assign out_valid = rd_v_q;
  assign out_sof   = rd_sof_q;
  assign out_ctrl  = rd_ctrl_q;
  assign a_re = fmt(lo_q[2*IW-1:IW], rd_ctrl_q.inverse);
  assign a_im = fmt(lo_q[IW-1:0],    rd_ctrl_q.inverse);
  assign b_re = fmt(hi_q[2*IW-1:IW], rd_ctrl_q.inverse);
  assign b_im = fmt(hi_q[IW-1:0],    rd_ctrl_q.inverse);

  // the read burst (N/2 clocks) always ends before the other buffer fills (N samples)
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !overflow)
    else $error("input_stage: frame written into a buffer that was not yet read");
endmodule
