// tb_stt_copy: checks one copy of the state transition table.
//
// Loads random transitions for the first 64 states and random information
// words for them, then issues a random query every clock (some clocks idle)
// and checks next state, information word (all zero for the dead state 0),
// tag and the two-clock latency against a software copy.
module tb_stt_copy;
  import xav_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               q_valid = 1'b0, r_valid, trans_wr = 1'b0, info_wr = 1'b0;
  stt_query_t         q = '0;
  logic [6:0]         q_tag = '0, r_tag;
  stt_resp_t          r;
  logic [STATE_W+7:0] trans_addr = '0;
  logic [STATE_W-1:0] trans_data = '0, info_addr = '0;
  stt_info_t          info_data = '0;

  stt_copy dut (.*);

  localparam int NS = 64;
  int        tr_m [NS*256];
  stt_info_t in_m [NS];

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  stt_resp_t exp_q [$];
  int tag_q [$], cyc_q [$];
  always @(posedge clk) begin
    cyc++;
    if (r_valid && rst_n) begin
      stt_resp_t e;
      int t, c;
      e = exp_q.pop_front(); t = tag_q.pop_front(); c = cyc_q.pop_front();
      checks++;
      if (r != e || int'(r_tag) != t || cyc - c != 2) begin
        failures++;
        if (failures < 10) $display("FAIL: got %h/%0d expected %h/%0d, latency %0d", r, r_tag, e, t, cyc - c);
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NS; s++) begin
      in_m[s] = '{accept: 1'($urandom), frag: FRAG_W'($urandom), fwd_start: STATE_W'($urandom_range(NS-1))};
      @(negedge clk);
      info_wr = 1'b1; info_addr = STATE_W'(s); info_data = in_m[s];
      for (int c = 0; c < 256; c++) begin
        tr_m[s*256 + c] = ($urandom_range(3) == 0) ? 0 : $urandom_range(NS-1);
        @(negedge clk);
        info_wr = 1'b0;
        trans_wr = 1'b1; trans_addr = (STATE_W+8)'(s*256 + c); trans_data = STATE_W'(tr_m[s*256 + c]);
      end
      @(negedge clk);
      trans_wr = 1'b0;
    end
    for (int i = 0; i < 5000; i++) begin
      int s, c, n;
      @(negedge clk);
      q_valid = ($urandom_range(4) != 0);
      s = $urandom_range(NS-1); c = $urandom_range(255);
      q = '{state: STATE_W'(s), symbol: 8'(c)};
      q_tag = 7'($urandom);
      if (q_valid) begin
        n = tr_m[s*256 + c];
        exp_q.push_back('{next: STATE_W'(n), info: (n == 0) ? '0 : in_m[n]});
        tag_q.push_back(int'(q_tag));
        cyc_q.push_back(cyc + 1);
      end
    end
    @(negedge clk);
    q_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
