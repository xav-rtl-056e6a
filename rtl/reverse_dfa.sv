// reverse_dfa: the backward matching thread of an anchor DFA engine.
//
// The front part of every lsRE fragment ends with the literal that the
// pre-filter looks for, so the front parts are compiled reversed into one
// anchored DFA. Started at a matching position pos, this module walks the
// packet backwards from pos: it reads the byte, sends (state, byte) to the
// shared STT, and moves to the returned state. When the returned state is
// accepting, the front part of a fragment spans [p, pos]; the module hands
// (fragment, start p, end pos, forward start state) to the forward DFA and
// then goes on, so that longer front parts ending at pos are found too. The
// thread ends at the dead state or after the first byte of the packet.
// Backward matching from pos follows the paper. The fixed start state 1,
// dead state 0, continuing past an accepting state and passing the forward
// start state with the fragment id are this design's choices.
//
// Timing: per byte one clock to read the packet buffer, at least one clock
// to win the STT, and two clocks for the STT result (4 clocks at best).
module reverse_dfa
  import xav_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // start of a thread
  input  logic               start_valid,
  output logic               start_ready,
  input  logic [POS_W-1:0]   start_pos,
  // packet buffer read port (data one clock after address)
  output logic [POS_W-1:0]   rd_addr,
  input  logic [7:0]         rd_data,
  // shared STT
  output logic               q_req,
  output stt_query_t         q,
  input  logic               q_gnt,
  input  logic               r_valid,
  input  stt_resp_t          r,
  // matched front part, to the forward DFA
  output logic               h_valid,
  input  logic               h_ready,
  output logic [FRAG_W-1:0]  h_frag,
  output logic [POS_W-1:0]   h_start,
  output logic [POS_W-1:0]   h_end,
  output logic [STATE_W-1:0] h_fwd
);
  typedef enum logic [2:0] {IDLE, READ, QUERY, WAIT, HAND} st_e;
  st_e                st;
  logic [STATE_W-1:0] state;
  logic [POS_W-1:0]   p, pos;
  stt_info_t          acc;

  assign start_ready = (st == IDLE);
  assign rd_addr     = p;
  assign q_req       = (st == QUERY);
  assign q           = '{state: state, symbol: rd_data};
  assign h_valid     = (st == HAND);
  assign h_frag      = acc.frag;
  assign h_fwd       = acc.fwd_start;
  assign h_start     = p;
  assign h_end       = pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= IDLE;
      state <= '0;
      p     <= '0;
      pos   <= '0;
      acc   <= '0;
    end else begin
      unique case (st)
        IDLE: if (start_valid) begin
          state <= STATE_W'(REV_START);
          p     <= start_pos;
          pos   <= start_pos;
          st    <= READ;
        end
        READ:  st <= QUERY;
        QUERY: if (q_gnt) st <= WAIT;
        WAIT: if (r_valid) begin
          state <= r.next;
          if (r.next == STATE_W'(DEAD_STATE)) st <= IDLE;
          else if (r.info.accept) begin
            acc <= r.info;
            st  <= HAND;
          end else if (p == '0) st <= IDLE;
          else begin
            p  <= p - 1'b1;
            st <= READ;
          end
        end
        HAND: if (h_ready) begin
          if (p == '0) st <= IDLE;
          else begin
            p  <= p - 1'b1;
            st <= READ;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  // a query is held until granted
  q_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           q_req && !q_gnt |=> q_req && $stable(q));
endmodule
