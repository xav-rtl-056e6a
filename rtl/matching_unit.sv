// matching_unit: one of the N parallel matching units.
//
// A unit owns one packet at a time. The input scheduler writes the packet
// into the unit's buffer in wide beats; meanwhile the unit scans the bytes
// already written, one per clock, through its pre-filter (DFU plus two xor
// filter units). Each position where the filter hits goes to the anchor DFA
// engine, which confirms lsRE fragments with backward and forward threads
// and queues fragment matches, tagged with the packet id, in a report FIFO.
// The unit is idle again (ready for the next packet) when the whole packet
// is written and scanned and the engine has no queued position and no
// running thread; reports may still be waiting in the FIFO.
// "Matching unit = xor filter + anchor DFA" follows the paper; the buffer,
// the scan throttle (the scan pauses while the position FIFO is nearly full)
// and the report FIFO are this design's choices.
//
// Timing: the scan reads a byte per clock; the filter answers 3 clocks
// later; positions take about 4 clocks per DFA byte. The unit takes in
// beats whenever the scheduler writes them (no back-pressure once a packet
// has started).
module matching_unit
  import xav_pkg::*;
#(
  parameter int unsigned IN_BYTES  = 64,
  parameter int unsigned REP_DEPTH = 8,
  parameter int unsigned POS_DEPTH = 16,
  localparam int unsigned PKT_MAX  = 2**POS_W,
  localparam int unsigned LW       = POS_W + 1,
  localparam int unsigned BW       = $clog2(PKT_MAX / IN_BYTES),
  localparam int unsigned NW       = $clog2(IN_BYTES + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // packet input from the input scheduler
  output logic                     unit_idle,
  input  logic                     wr_en,
  input  logic                     wr_first,
  input  logic                     wr_last,
  input  logic [BW-1:0]            wr_beat,
  input  logic [NW-1:0]            wr_nbytes,
  input  logic [IN_BYTES-1:0][7:0] wr_data,
  input  logic [PKT_W-1:0]         wr_pkt,
  // configuration bus (filter tables)
  input  logic                     cfg_valid,
  input  cfg_sel_e                 cfg_sel,
  input  logic [23:0]              cfg_addr,
  input  logic [63:0]              cfg_data,
  // STT query ports: [0] reverse DFA, [1] forward DFA
  output logic [1:0]               q_req,
  output stt_query_t               q       [2],
  input  logic [1:0]               q_gnt,
  input  logic [1:0]               r_valid,
  input  stt_resp_t                r       [2],
  // fragment match reports
  output logic                     rep_valid,
  input  logic                     rep_ready,
  output report_t                  rep,
  // event strobes for monitoring
  output logic                     ev_filter_hit,
  output logic                     ev_scan_hold,
  output logic                     ev_fwd_stall,
  output logic                     ev_rep_full
);
  // ---------------- packet state ----------------
  logic             busy;
  logic [LW-1:0]    wr_count;   // bytes written so far
  logic             wr_done;    // last beat written
  logic [PKT_W-1:0] pkt_id;
  logic [LW-1:0]    scan_ptr;   // next byte to scan
  logic [2:0]       in_flight;  // bytes between buffer read and filter result
  logic             eng_idle;

  assign unit_idle = !busy;

  logic [POS_W-1:0] rd_addr [3];
  logic [7:0]       rd_data [3];

  packet_buffer #(.PKT_MAX(PKT_MAX), .IN_BYTES(IN_BYTES)) u_buf (
    .clk,
    .wr_en     (wr_en),
    .wr_beat   (wr_beat),
    .wr_nbytes (wr_nbytes),
    .wr_data   (wr_data),
    .rd_addr   (rd_addr),
    .rd_data   (rd_data)
  );

  // ---------------- scan ----------------
  logic [$clog2(POS_DEPTH):0] pos_count;
  logic scan_go, scan_room, scan_v;
  logic [POS_W-1:0] scan_pos;

  // room for every byte already in flight plus this one
  assign scan_room = (int'(pos_count) + int'(in_flight) + 1) < POS_DEPTH;
  assign scan_go   = busy && (scan_ptr < wr_count) && scan_room;
  assign rd_addr[0] = scan_ptr[POS_W-1:0];

  logic hit_valid, hit;
  logic [POS_W-1:0] hit_pos;

  xor_filter u_filter (
    .clk, .rst_n,
    .in_valid  (scan_v),
    .in_first  (scan_pos == '0),
    .in_byte   (rd_data[0]),
    .in_pos    (scan_pos),
    .hit_valid (hit_valid),
    .hit       (hit),
    .hit_pos   (hit_pos),
    .cfg_valid, .cfg_sel, .cfg_addr, .cfg_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      wr_count  <= '0;
      wr_done   <= 1'b0;
      pkt_id    <= '0;
      scan_ptr  <= '0;
      scan_v    <= 1'b0;
      scan_pos  <= '0;
      in_flight <= '0;
    end else begin
      // packet writes
      if (wr_en) begin
        if (wr_first) begin
          busy     <= 1'b1;
          pkt_id   <= wr_pkt;
          wr_count <= LW'(wr_nbytes);
          scan_ptr <= '0;
        end else begin
          wr_count <= wr_count + LW'(wr_nbytes);
        end
        wr_done <= wr_last;
      end
      // scan
      scan_v   <= scan_go;
      scan_pos <= scan_ptr[POS_W-1:0];
      if (scan_go && !(wr_en && wr_first)) scan_ptr <= scan_ptr + 1'b1;
      in_flight <= in_flight + 3'(scan_go) - 3'(hit_valid);
      // finished: all written, all scanned, nothing in flight, engine idle
      if (busy && !wr_en && wr_done && scan_ptr == wr_count && in_flight == '0 &&
          !scan_go && eng_idle)
        busy <= 1'b0;
    end
  end

  // ---------------- anchor DFA engine ----------------
  logic              eo_valid, eo_ready;
  logic [FRAG_W-1:0] eo_frag;
  logic [POS_W-1:0]  eo_start, eo_end;

  anchor_dfa #(.POS_DEPTH(POS_DEPTH)) u_engine (
    .clk, .rst_n,
    .pos_push  (hit_valid && hit),
    .pos_in    (hit_pos),
    .pos_count (pos_count),
    .wr_count, .wr_done,
    .rd_addr   (rd_addr[1:2]),
    .rd_data   (rd_data[1:2]),
    .q_req, .q, .q_gnt, .r_valid, .r,
    .o_valid   (eo_valid),
    .o_ready   (eo_ready),
    .o_frag    (eo_frag),
    .o_start   (eo_start),
    .o_end     (eo_end),
    .idle      (eng_idle),
    .fwd_stall (ev_fwd_stall)
  );

  // ---------------- reports ----------------
  logic rep_empty, rep_full;
  report_t rep_in;
  assign rep_in   = '{pkt: pkt_id, frag: eo_frag, start_pos: eo_start, end_pos: eo_end};
  assign eo_ready = !rep_full;

  sync_fifo #(.WIDTH($bits(report_t)), .DEPTH(REP_DEPTH)) u_rep_fifo (
    .clk, .rst_n,
    .wr_en   (eo_valid && !rep_full),
    .wr_data (rep_in),
    .rd_en   (rep_valid && rep_ready),
    .rd_data (rep),
    .empty   (rep_empty),
    .full    (rep_full),
    .count   ()
  );
  assign rep_valid = !rep_empty;

  assign ev_filter_hit = hit_valid && hit;
  assign ev_scan_hold  = busy && (scan_ptr < wr_count) && !scan_room;
  assign ev_rep_full   = eo_valid && rep_full;

  // a new packet only arrives at an idle unit
  new_pkt_idle: assert property (@(posedge clk) disable iff (!rst_n) wr_en && wr_first |-> !busy);
endmodule
