// anchor_dfa: the anchor DFA engine of one matching unit.
//
// Matching positions from the pre-filter wait in a FIFO. The reverse DFA
// takes one position at a time and runs a backward thread from it; each
// front part it finds is handed to the forward DFA, which matches the
// fragment's back part from the next byte on and emits the fragment match.
// The two threads run concurrently (the reverse DFA only waits when the
// forward DFA has not yet taken its previous front part) and each has its
// own port to the shared STT (port 0 reverse, port 1 forward).
// The reverse -> fragment id -> forward chain and the two query paths follow
// the paper's figures. The 16-entry position FIFO is this design's choice;
// pos_count lets the caller hold the filter scan before the FIFO overflows.
module anchor_dfa
  import xav_pkg::*;
#(
  parameter int unsigned POS_DEPTH = 16,
  localparam int unsigned LW = POS_W + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // matching positions
  input  logic                        pos_push,
  input  logic [POS_W-1:0]            pos_in,
  output logic [$clog2(POS_DEPTH):0]  pos_count,
  // packet progress
  input  logic [LW-1:0]               wr_count,
  input  logic                        wr_done,
  // packet buffer read ports: [0] reverse, [1] forward
  output logic [POS_W-1:0]            rd_addr [2],
  input  logic [7:0]                  rd_data [2],
  // STT query ports: [0] reverse, [1] forward
  output logic [1:0]                  q_req,
  output stt_query_t                  q       [2],
  input  logic [1:0]                  q_gnt,
  input  logic [1:0]                  r_valid,
  input  stt_resp_t                   r       [2],
  // fragment matches
  output logic                        o_valid,
  input  logic                        o_ready,
  output logic [FRAG_W-1:0]           o_frag,
  output logic [POS_W-1:0]            o_start,
  output logic [POS_W-1:0]            o_end,
  // status
  output logic                        idle,       // no position queued, no thread running
  output logic                        fwd_stall
);
  logic             fifo_empty, fifo_full;
  logic [POS_W-1:0] fifo_pos;
  logic             rv_ready;

  sync_fifo #(.WIDTH(POS_W), .DEPTH(POS_DEPTH)) u_pos_fifo (
    .clk, .rst_n,
    .wr_en   (pos_push),
    .wr_data (pos_in),
    .rd_en   (rv_ready && !fifo_empty),
    .rd_data (fifo_pos),
    .empty   (fifo_empty),
    .full    (fifo_full),
    .count   (pos_count)
  );

  logic               h_valid, h_ready;
  logic [FRAG_W-1:0]  h_frag;
  logic [POS_W-1:0]   h_start, h_end;
  logic [STATE_W-1:0] h_fwd;

  reverse_dfa u_rev (
    .clk, .rst_n,
    .start_valid (!fifo_empty),
    .start_ready (rv_ready),
    .start_pos   (fifo_pos),
    .rd_addr     (rd_addr[0]),
    .rd_data     (rd_data[0]),
    .q_req       (q_req[0]),
    .q           (q[0]),
    .q_gnt       (q_gnt[0]),
    .r_valid     (r_valid[0]),
    .r           (r[0]),
    .h_valid, .h_ready, .h_frag, .h_start, .h_end, .h_fwd
  );

  logic fw_ready;
  assign h_ready = fw_ready;

  forward_dfa u_fwd (
    .clk, .rst_n,
    .s_valid  (h_valid),
    .s_ready  (fw_ready),
    .s_frag   (h_frag),
    .s_start  (h_start),
    .s_end    (h_end),
    .s_fwd    (h_fwd),
    .wr_count, .wr_done,
    .rd_addr  (rd_addr[1]),
    .rd_data  (rd_data[1]),
    .q_req    (q_req[1]),
    .q        (q[1]),
    .q_gnt    (q_gnt[1]),
    .r_valid  (r_valid[1]),
    .r        (r[1]),
    .o_valid, .o_ready, .o_frag, .o_start, .o_end,
    .stall    (fwd_stall)
  );

  assign idle = fifo_empty && rv_ready && fw_ready && !h_valid;

  no_pos_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(pos_push && fifo_full));
endmodule
