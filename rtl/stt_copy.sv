// stt_copy: one copy of the anchor-DFA state transition table (STT).
//
// All reverse and forward DFAs of the engine share one state space, so one
// table serves both. A query (state, byte) reads the transition memory for
// the next state, and the next state then reads the per-state information
// memory (accepting flag, fragment id, forward start state). Both reads are
// pipelined, so a copy takes one query every clock. The dead state 0 always
// returns an all-zero information word.
// Sharing a few copies among all matching units follows the paper. The paper
// compresses the table (perfect hashing plus bitmap encoding); this copy
// stores it uncompressed, 2^STATE_W states x 256 entries, which is this
// design's simplification. The separate information memory is also this
// design's choice.
//
// Timing: q_valid/q/q_tag in cycle t -> r_valid/r/r_tag in cycle t+2.
// Programming: trans_wr writes next state trans_data for {state, byte} =
// trans_addr; info_wr writes info_data for state info_addr.
module stt_copy
  import xav_pkg::*;
#(
  parameter int unsigned TAG_W = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   q_valid,
  input  stt_query_t             q,
  input  logic [TAG_W-1:0]       q_tag,
  output logic                   r_valid,
  output stt_resp_t              r,
  output logic [TAG_W-1:0]       r_tag,
  // programming
  input  logic                   trans_wr,
  input  logic [STATE_W+7:0]     trans_addr,
  input  logic [STATE_W-1:0]     trans_data,
  input  logic                   info_wr,
  input  logic [STATE_W-1:0]     info_addr,
  input  stt_info_t              info_data
);
  logic [STATE_W-1:0] trans [2**(STATE_W+8)];
  stt_info_t          info  [2**STATE_W];

  always_ff @(posedge clk) begin
    if (trans_wr) trans[trans_addr] <= trans_data;
    if (info_wr)  info[info_addr]   <= info_data;
  end

  // stage 1: transition read
  logic               v1;
  logic [TAG_W-1:0]   tag1;
  logic [STATE_W-1:0] next1;
  always_ff @(posedge clk) begin
    next1 <= trans[{q.state, q.symbol}];
    tag1  <= q_tag;
  end

  // stage 2: information read of the next state
  stt_info_t info2;
  logic      dead2;
  always_ff @(posedge clk) begin
    info2   <= info[next1];
    dead2   <= (next1 == STATE_W'(DEAD_STATE));
    r.next  <= next1;
    r_tag   <= tag1;
  end
  assign r.info = dead2 ? '0 : info2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1      <= 1'b0;
      r_valid <= 1'b0;
    end else begin
      v1      <= q_valid;
      r_valid <= v1;
    end
  end
endmodule
