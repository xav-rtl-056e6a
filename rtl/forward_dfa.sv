// forward_dfa: the forward matching thread of an anchor DFA engine.
//
// The back parts of all lsRE fragments are compiled into anchored DFAs that
// share one state space (merged tables). For a front part found by the
// reverse DFA, this module starts at the fragment's forward start state at
// byte end+1 and walks forward through the packet, one STT query per byte.
// Every accepting state reports a fragment match (fragment id from the
// accepting state, start from the front part, end at the current byte); the
// thread ends at the dead state or at the end of the packet. A front part
// whose fragment has no back part (forward start state 0) is reported at
// once with the front part's own fragment id and end.
// The reverse-then-forward order and merged forward tables follow the
// paper. The meaning of forward start state 0, and waiting (stall) when the
// next byte has not yet been written into the packet buffer, are this
// design's choices.
//
// Timing: as the reverse DFA, about 4 clocks per byte; a report waits in
// REPORT until o_ready.
module forward_dfa
  import xav_pkg::*;
#(
  localparam int unsigned LW = POS_W + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // matched front part from the reverse DFA
  input  logic               s_valid,
  output logic               s_ready,
  input  logic [FRAG_W-1:0]  s_frag,
  input  logic [POS_W-1:0]   s_start,
  input  logic [POS_W-1:0]   s_end,
  input  logic [STATE_W-1:0] s_fwd,
  // packet progress: bytes written so far, and whether that is all
  input  logic [LW-1:0]      wr_count,
  input  logic               wr_done,
  // packet buffer read port
  output logic [POS_W-1:0]   rd_addr,
  input  logic [7:0]         rd_data,
  // shared STT
  output logic               q_req,
  output stt_query_t         q,
  input  logic               q_gnt,
  input  logic               r_valid,
  input  stt_resp_t          r,
  // fragment match
  output logic               o_valid,
  input  logic               o_ready,
  output logic [FRAG_W-1:0]  o_frag,
  output logic [POS_W-1:0]   o_start,
  output logic [POS_W-1:0]   o_end,
  // a byte was not yet in the buffer this clock
  output logic               stall
);
  typedef enum logic [2:0] {IDLE, CHECK, READ, QUERY, WAIT, REPORT} st_e;
  st_e                st;
  logic [STATE_W-1:0] state;
  logic [LW-1:0]      p;        // next byte to read (may reach PKT_MAX)
  logic               direct;   // report without a back part
  logic [FRAG_W-1:0]  frag;
  logic [POS_W-1:0]   fstart, fend;

  assign s_ready = (st == IDLE);
  assign rd_addr = p[POS_W-1:0];
  assign q_req   = (st == QUERY);
  assign q       = '{state: state, symbol: rd_data};
  assign o_valid = (st == REPORT);
  assign o_frag  = frag;
  assign o_start = fstart;
  assign o_end   = fend;
  assign stall   = (st == CHECK) && !(p < wr_count) && !wr_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= IDLE;
      state  <= '0;
      p      <= '0;
      direct <= 1'b0;
      frag   <= '0;
      fstart <= '0;
      fend   <= '0;
    end else begin
      unique case (st)
        IDLE: if (s_valid) begin
          fstart <= s_start;
          if (s_fwd == STATE_W'(DEAD_STATE)) begin
            frag   <= s_frag;
            fend   <= s_end;
            direct <= 1'b1;
            st     <= REPORT;
          end else begin
            state  <= s_fwd;
            p      <= LW'(s_end) + 1'b1;
            direct <= 1'b0;
            st     <= CHECK;
          end
        end
        CHECK: begin
          if (p < wr_count) st <= READ;
          else if (wr_done) st <= IDLE;   // end of packet
        end
        READ:  st <= QUERY;
        QUERY: if (q_gnt) st <= WAIT;
        WAIT: if (r_valid) begin
          state <= r.next;
          if (r.next == STATE_W'(DEAD_STATE)) st <= IDLE;
          else if (r.info.accept) begin
            frag <= r.info.frag;
            fend <= p[POS_W-1:0];
            st   <= REPORT;
          end else begin
            p  <= p + 1'b1;
            st <= CHECK;
          end
        end
        REPORT: if (o_ready) begin
          if (direct) st <= IDLE;
          else begin
            p  <= p + 1'b1;
            st <= CHECK;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  q_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           q_req && !q_gnt |=> q_req && $stable(q));
endmodule
