// xav_top: the hardware part of the XAV regular-expression engine.
//
// Packets enter as a stream of 64-byte beats. The input scheduler hands
// each packet to an idle one of N_UNITS matching units. In its unit the
// packet is scanned byte by byte by the pre-filter (direct filter unit for
// 2-byte literals, xor filter units for 4- and 8-byte literals); at every
// position where a literal may end, the unit's anchor DFA engine runs a
// backward thread over the reversed front parts of the lsRE fragments and,
// for each front part found, a forward thread over its back part. All
// threads of all units share M_COPIES copies of one state transition table
// through the query scheduler. Confirmed fragment matches (packet id,
// fragment id, first and last byte) leave through the report collector;
// the host combines them into whole-regex matches (not part of this RTL).
// The configuration bus loads the filter tables into every unit and the
// transition table into every copy, so a new rule set needs no new logic.
// N_UNITS = 64 and M_COPIES = 6 are the paper's numbers; the stream and
// configuration formats are this design's. Event outputs are level flags
// for monitoring: some unit's filter hit, a packet waiting for a free unit,
// a scan held by a full position queue, a forward thread waiting for bytes,
// a full report queue, and an STT query not granted this clock.
module xav_top
  import xav_pkg::*;
#(
  parameter int unsigned N_UNITS  = 64,
  parameter int unsigned M_COPIES = 6,
  parameter int unsigned IN_BYTES = 64,
  localparam int unsigned NW      = $clog2(IN_BYTES + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // packet stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [IN_BYTES-1:0][7:0] in_data,
  input  logic [NW-1:0]            in_nbytes,
  input  logic                     in_last,
  // configuration
  input  logic                     cfg_valid,
  input  cfg_sel_e                 cfg_sel,
  input  logic [23:0]              cfg_addr,
  input  logic [63:0]              cfg_data,
  // fragment matches to the host
  output logic                     rep_valid,
  input  logic                     rep_ready,
  output report_t                  rep,
  // monitoring
  output logic                     ev_filter_hit,
  output logic                     ev_all_busy,
  output logic                     ev_scan_hold,
  output logic                     ev_fwd_stall,
  output logic                     ev_rep_full,
  output logic                     ev_stt_wait,
  output logic                     all_idle
);
  localparam int unsigned N_REQ = 2 * N_UNITS;
  localparam int unsigned TAG_W = $clog2(N_REQ);
  localparam int unsigned BW    = $clog2((2**POS_W) / IN_BYTES);

  // ---------------- input scheduler ----------------
  logic [N_UNITS-1:0]       unit_idle, wr_en;
  logic                     wr_first, wr_last;
  logic [BW-1:0]            wr_beat;
  logic [NW-1:0]            wr_nbytes;
  logic [IN_BYTES-1:0][7:0] wr_data;
  logic [PKT_W-1:0]         wr_pkt;

  input_scheduler #(.N_UNITS(N_UNITS), .IN_BYTES(IN_BYTES)) u_sched (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data, .in_nbytes, .in_last,
    .unit_idle, .wr_en, .wr_first, .wr_last, .wr_beat, .wr_nbytes, .wr_data, .wr_pkt,
    .ev_all_busy
  );

  // ---------------- matching units ----------------
  logic [N_REQ-1:0]   q_req, q_gnt, r_valid;
  stt_query_t         q [N_REQ];
  stt_resp_t          r [N_REQ];
  logic [N_UNITS-1:0] u_rep_valid, u_rep_ready;
  report_t            u_rep [N_UNITS];
  logic [N_UNITS-1:0] e_hit, e_hold, e_stall, e_full;

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    stt_query_t uq [2];
    stt_resp_t  ur [2];
    assign q[2*u]     = uq[0];
    assign q[2*u + 1] = uq[1];
    assign ur[0]      = r[2*u];
    assign ur[1]      = r[2*u + 1];

    matching_unit #(.IN_BYTES(IN_BYTES)) u_mu (
      .clk, .rst_n,
      .unit_idle (unit_idle[u]),
      .wr_en     (wr_en[u]),
      .wr_first, .wr_last, .wr_beat, .wr_nbytes, .wr_data, .wr_pkt,
      .cfg_valid, .cfg_sel, .cfg_addr, .cfg_data,
      .q_req     (q_req[2*u +: 2]),
      .q         (uq),
      .q_gnt     (q_gnt[2*u +: 2]),
      .r_valid   (r_valid[2*u +: 2]),
      .r         (ur),
      .rep_valid (u_rep_valid[u]),
      .rep_ready (u_rep_ready[u]),
      .rep       (u_rep[u]),
      .ev_filter_hit (e_hit[u]),
      .ev_scan_hold  (e_hold[u]),
      .ev_fwd_stall  (e_stall[u]),
      .ev_rep_full   (e_full[u])
    );
  end

  // ---------------- shared state transition tables ----------------
  logic [M_COPIES-1:0] cp_valid, cp_r_valid;
  stt_query_t          cp_query [M_COPIES];
  logic [TAG_W-1:0]    cp_tag   [M_COPIES];
  stt_resp_t           cp_r     [M_COPIES];
  logic [TAG_W-1:0]    cp_r_tag [M_COPIES];

  query_scheduler #(.N_REQ(N_REQ), .M_COPIES(M_COPIES)) u_qs (
    .clk, .rst_n,
    .req (q_req), .query (q), .gnt (q_gnt), .rsp_valid (r_valid), .rsp (r),
    .cp_valid, .cp_query, .cp_tag, .cp_r_valid, .cp_r, .cp_r_tag
  );

  for (genvar k = 0; k < M_COPIES; k++) begin : g_stt
    stt_copy #(.TAG_W(TAG_W)) u_stt (
      .clk, .rst_n,
      .q_valid    (cp_valid[k]),
      .q          (cp_query[k]),
      .q_tag      (cp_tag[k]),
      .r_valid    (cp_r_valid[k]),
      .r          (cp_r[k]),
      .r_tag      (cp_r_tag[k]),
      .trans_wr   (cfg_valid && cfg_sel == CFG_STT_TRANS),
      .trans_addr (cfg_addr[STATE_W+7:0]),
      .trans_data (cfg_data[STATE_W-1:0]),
      .info_wr    (cfg_valid && cfg_sel == CFG_STT_INFO),
      .info_addr  (cfg_addr[STATE_W-1:0]),
      .info_data  (cfg_data[$bits(stt_info_t)-1:0])
    );
  end

  // ---------------- reports ----------------
  report_collector #(.N_UNITS(N_UNITS)) u_coll (
    .clk, .rst_n,
    .in_valid  (u_rep_valid),
    .in_ready  (u_rep_ready),
    .in_rep    (u_rep),
    .out_valid (rep_valid),
    .out_ready (rep_ready),
    .out_rep   (rep)
  );

  assign ev_filter_hit = |e_hit;
  assign ev_scan_hold  = |e_hold;
  assign ev_fwd_stall  = |e_stall;
  assign ev_rep_full   = |e_full;
  assign ev_stt_wait   = |(q_req & ~q_gnt);
  assign all_idle      = (&unit_idle) && !(|u_rep_valid) && !rep_valid;
endmodule
