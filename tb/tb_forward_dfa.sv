// tb_forward_dfa: checks the forward matching thread.
//
// The shared STT is replaced by the behavioural model tb_stt_model serving
// the default rule set. Each random packet is "written" 64 bytes at a time
// every 24 clocks (wr_count, wr_done) while the thread is started for every
// front part found in it, in order of end position, so that the thread must
// wait for bytes that are not yet written. The reports of each start are
// compared as a set with the brute-force fragment matches of the same
// fragment and start; the report output is back-pressured at random. The
// testbench also checks that the stall output was seen.
module tb_forward_dfa;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               s_valid = 1'b0, s_ready;
  logic [FRAG_W-1:0]  s_frag = '0;
  logic [POS_W-1:0]   s_start = '0, s_end = '0;
  logic [STATE_W-1:0] s_fwd = '0;
  logic [POS_W:0]     wr_count = '0;
  logic               wr_done = 1'b0;
  logic [POS_W-1:0]   rd_addr;
  logic [7:0]         rd_data;
  logic               q_req, q_gnt, r_valid;
  stt_query_t         q;
  stt_resp_t          r;
  logic               o_valid, o_ready = 1'b1;
  logic [FRAG_W-1:0]  o_frag;
  logic [POS_W-1:0]   o_start, o_end;
  logic               stall;

  forward_dfa dut (.*);

  logic [0:0]  mq_req, mq_gnt, mr_valid;
  stt_query_t  mq [1];
  stt_resp_t   mr [1];
  assign mq_req  = q_req;
  assign mq[0]   = q;
  assign q_gnt   = mq_gnt[0];
  assign r_valid = mr_valid[0];
  assign r       = mr[0];
  tb_stt_model #(.NP(1)) stt (.clk, .q_req(mq_req), .q(mq), .q_gnt(mq_gnt), .r_valid(mr_valid), .r(mr));

  byte mem [2048];
  always @(posedge clk) rd_data <= mem[rd_addr];
  always @(negedge clk) o_ready = ($urandom_range(2) != 0);

  longint got [$];
  int     n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (o_valid && o_ready)
      got.push_back(longint'(o_frag) * 64'h1000000 + longint'(o_start) * 64'h1000 + longint'(o_end));
    if (stall) n_stall++;
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  int len = 0;
  bit writing = 0;
  // packet writer: one 64-byte beat every 24 clocks
  always begin
    @(negedge clk);
    if (writing) begin
      repeat (23) @(negedge clk);
      if (int'(wr_count) + 64 >= len) begin
        wr_count = (POS_W+1)'(len);
        wr_done  = 1'b1;
        writing  = 0;
      end else wr_count = wr_count + 64;
    end
  end

  xav_rules rules;
  initial begin
    int n_rep = 0;
    rules = default_rules();
    rules.compile();
    g_rules = rules;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      automatic byte    pkt [$];
      automatic longint exp [$];
      make_packet(rules, $urandom_range(20, 400), $urandom_range(1, 8), pkt);
      rules.expect_matches(pkt, exp);
      foreach (pkt[i]) mem[i] = pkt[i];
      len = pkt.size();
      wr_count = '0; wr_done = 1'b0; writing = 1;
      for (int pos = 0; pos < len; pos++) begin
        foreach (rules.front[f]) begin
          int l, st;
          bit ok;
          automatic longint want [$];
          l = rules.front[f].len();
          st = pos - l + 1;
          if (st < 0) continue;
          ok = 1;
          for (int j = 0; j < l; j++) if (pkt[st+j] != byte'(rules.front[f][j])) ok = 0;
          if (!ok) continue;
          foreach (exp[k]) if (exp[k] / 64'h1000000 == f && (exp[k] / 64'h1000) % 64'h1000 == st) want.push_back(exp[k]);
          got.delete();
          @(negedge clk);
          while (!s_ready) @(negedge clk);
          s_valid = 1'b1; s_frag = FRAG_W'(f); s_start = POS_W'(st); s_end = POS_W'(pos);
          s_fwd = rules.state_info(rules.lookup_front_end(f)).fwd_start;
          @(negedge clk);
          s_valid = 1'b0;
          while (!s_ready) @(negedge clk);
          repeat (2) @(negedge clk);
          got.sort(); want.sort();
          checks++;
          n_rep += want.size();
          if (got != want) begin
            failures++;
            if (failures < 10) $display("FAIL packet %0d frag %0d start %0d: got %p expected %p", t, f, st, got, want);
          end
        end
      end
      while (writing) @(negedge clk);
    end
    $display("reports: %0d, stall clocks: %0d", n_rep, n_stall);
    checks++;
    if (n_rep < 40 || n_stall == 0) begin failures++; $display("FAIL: too few reports or no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
