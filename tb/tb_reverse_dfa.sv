// tb_reverse_dfa: checks the backward matching thread.
//
// The shared STT is replaced by the behavioural model tb_stt_model (random
// grant delay, two-clock result) serving the default rule set. For random
// packets with planted fragments the thread is started at every position
// where a front part ends and at random other positions; the hand-overs it
// produces (fragment, start, end, forward start state) are compared as a
// set with those computed by brute force from the rule set. The hand-over
// is back-pressured at random.
module tb_reverse_dfa;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               start_valid = 1'b0, start_ready;
  logic [POS_W-1:0]   start_pos = '0;
  logic [POS_W-1:0]   rd_addr;
  logic [7:0]         rd_data;
  logic               q_req, q_gnt, r_valid;
  stt_query_t         q;
  stt_resp_t          r;
  logic               h_valid, h_ready = 1'b1;
  logic [FRAG_W-1:0]  h_frag;
  logic [POS_W-1:0]   h_start, h_end;
  logic [STATE_W-1:0] h_fwd;

  reverse_dfa dut (.*);

  logic [0:0]  mq_req, mq_gnt, mr_valid;
  stt_query_t  mq [1];
  stt_resp_t   mr [1];
  assign mq_req = q_req;
  assign mq[0]  = q;
  assign q_gnt  = mq_gnt[0];
  assign r_valid = mr_valid[0];
  assign r      = mr[0];
  tb_stt_model #(.NP(1)) stt (.clk, .q_req(mq_req), .q(mq), .q_gnt(mq_gnt), .r_valid(mr_valid), .r(mr));

  byte pkt [$];
  byte mem [2048];
  always @(posedge clk) rd_data <= mem[rd_addr];
  always @(negedge clk) h_ready = ($urandom_range(2) != 0);

  longint got [$];
  always @(posedge clk)
    if (rst_n && h_valid && h_ready)
      got.push_back(longint'(h_frag) * 64'h1000000 + longint'(h_start) * 64'h1000 + longint'(h_end)
                    + longint'(h_fwd) * 64'h100000000);

  int checks = 0, failures = 0;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  xav_rules rules;
  initial begin
    int n_hand = 0;
    rules = default_rules();
    rules.compile();
    g_rules = rules;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      automatic longint exp [$];
      automatic longint want [$];
      make_packet(rules, $urandom_range(20, 300), $urandom_range(1, 6), pkt);
      rules.expect_matches(pkt, exp);
      foreach (pkt[i]) mem[i] = pkt[i];
      for (int pos = 0; pos < pkt.size(); pos++) begin
        bit is_end;
        is_end = 0;
        want.delete();
        foreach (rules.front[f]) begin
          int l;
          l = rules.front[f].len();
          if (pos >= l - 1) begin
            bit ok;
            ok = 1;
            for (int j = 0; j < l; j++) if (pkt[pos-l+1+j] != byte'(rules.front[f][j])) ok = 0;
            if (ok) begin
              is_end = 1;
              want.push_back(longint'(f) * 64'h1000000 + longint'(pos-l+1) * 64'h1000 + longint'(pos)
                             + longint'(rules.state_info(rules.lookup_front_end(f)).fwd_start) * 64'h100000000);
            end
          end
        end
        if (!is_end && $urandom_range(9) != 0) continue;
        got.delete();
        @(negedge clk);
        while (!start_ready) @(negedge clk);
        start_valid = 1'b1; start_pos = POS_W'(pos);
        @(negedge clk);
        start_valid = 1'b0;
        while (!start_ready) @(negedge clk);
        repeat (2) @(negedge clk);
        got.sort(); want.sort();
        checks++;
        n_hand += want.size();
        if (got != want) begin
          failures++;
          if (failures < 10) $display("FAIL packet %0d pos %0d: got %p expected %p", t, pos, got, want);
        end
      end
    end
    $display("hand-overs: %0d, refused STT requests: %0d", n_hand, stt.refused);
    checks++;
    if (n_hand < 40 || stt.refused == 0) begin failures++; $display("FAIL: too few hand-overs or no refusals"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
