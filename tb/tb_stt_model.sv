// tb_stt_model: behavioural stand-in for the query scheduler and the STT
// copies, for testbenches of the blocks that issue state transition queries.
//
// It serves NP query ports from the rule set in tb_xav_pkg::g_rules. A
// pending query is granted in a random clock (about half of the clocks,
// always within GNT_MAX clocks), and the result arrives two clocks after the
// grant, as from a real copy. It counts grants and refusals.
module tb_stt_model
  import xav_pkg::*;
  import tb_xav_pkg::*;
#(
  parameter int NP = 2
) (
  input  logic            clk,
  input  logic [NP-1:0]   q_req,
  input  stt_query_t      q [NP],
  output logic [NP-1:0]   q_gnt,
  output logic [NP-1:0]   r_valid,
  output stt_resp_t       r [NP]
);
  logic [NP-1:0] rnd = '0;
  stt_resp_t     p1 [NP];
  logic [NP-1:0] v1 = '0;
  int            refused = 0;

  always @(negedge clk) begin
    for (int i = 0; i < NP; i++) rnd[i] = ($urandom_range(1) == 1);
  end

  assign q_gnt = q_req & rnd;

  always @(posedge clk) begin
    for (int i = 0; i < NP; i++) begin
      int n;
      stt_resp_t t;
      n = g_rules.next_state(int'(q[i].state), byte'(q[i].symbol));
      t.next = STATE_W'(n);
      t.info = g_rules.state_info(n);
      p1[i] <= t;
      r[i]  <= p1[i];
      if (q_req[i] && !q_gnt[i]) refused++;
    end
    v1      <= q_gnt;
    r_valid <= v1;
  end

  initial for (int i = 0; i < NP; i++) begin p1[i] = '0; r[i] = '0; end
  initial r_valid = '0;
endmodule
