// tb_anchor_dfa: checks the anchor DFA engine (position FIFO, reverse and
// forward threads together).
//
// Both STT ports are served by the behavioural model tb_stt_model with the
// default rule set. Each random packet is written 64 bytes every 6 clocks;
// a scan process pushes, in order and only for written bytes, every
// position where a front part ends plus random false positives (as the
// pre-filter would), holding while the FIFO is full. After the packet the
// testbench waits for idle and compares all fragment matches, as a set,
// with the brute-force matches of the packet. Reports are back-pressured at
// random. It also checks that the position FIFO filled up at least once.
module tb_anchor_dfa;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  localparam int PD = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 pos_push = 1'b0;
  logic [POS_W-1:0]     pos_in = '0;
  logic [$clog2(PD):0]  pos_count;
  logic [POS_W:0]       wr_count = '0;
  logic                 wr_done = 1'b0;
  logic [POS_W-1:0]     rd_addr [2];
  logic [7:0]           rd_data [2];
  logic [1:0]           q_req, q_gnt, r_valid;
  stt_query_t           q [2];
  stt_resp_t            r [2];
  logic                 o_valid, o_ready = 1'b1;
  logic [FRAG_W-1:0]    o_frag;
  logic [POS_W-1:0]     o_start, o_end;
  logic                 idle, fwd_stall;

  anchor_dfa #(.POS_DEPTH(PD)) dut (.*);
  tb_stt_model #(.NP(2)) stt (.clk, .q_req, .q, .q_gnt, .r_valid, .r);

  byte mem [2048];
  always @(posedge clk) for (int k = 0; k < 2; k++) rd_data[k] <= mem[rd_addr[k]];
  always @(negedge clk) o_ready = ($urandom_range(3) != 0);

  longint got [$];
  int     max_count = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (o_valid && o_ready)
      got.push_back(longint'(o_frag) * 64'h1000000 + longint'(o_start) * 64'h1000 + longint'(o_end));
    if (int'(pos_count) > max_count) max_count = int'(pos_count);
    if (fwd_stall) n_stall++;
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  int len = 0;
  bit writing = 0;
  always begin
    @(negedge clk);
    if (writing) begin
      repeat (5) @(negedge clk);
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
      make_packet(rules, $urandom_range(20, 1500), (t % 10 == 3) ? 60 : $urandom_range(1, 10), pkt);
      rules.expect_matches(pkt, exp);
      foreach (pkt[i]) mem[i] = pkt[i];
      len = pkt.size();
      got.delete();
      wr_count = '0; wr_done = 1'b0; writing = 1;
      for (int pos = 0; pos < len; pos++) begin
        bit hit;
        hit = ($urandom_range(30) == 0);
        foreach (rules.front[f]) begin
          int l;
          bit ok;
          l = rules.front[f].len();
          if (pos < l - 1) continue;
          ok = 1;
          for (int j = 0; j < l; j++) if (pkt[pos-l+1+j] != byte'(rules.front[f][j])) ok = 0;
          if (ok) hit = 1;
        end
        if (!hit) continue;
        @(negedge clk);
        while (pos >= int'(wr_count) || int'(pos_count) >= PD) begin
          pos_push = 1'b0;
          @(negedge clk);
        end
        pos_push = 1'b1; pos_in = POS_W'(pos);
      end
      @(negedge clk);
      pos_push = 1'b0;
      while (writing) @(negedge clk);
      repeat (2) @(negedge clk);
      while (!idle) @(negedge clk);
      repeat (2) @(negedge clk);
      got.sort(); exp.sort();
      checks++;
      n_rep += exp.size();
      if (got != exp) begin
        failures++;
        if (failures < 10) $display("FAIL packet %0d: got %p expected %p", t, got, exp);
      end
    end
    $display("matches: %0d, most positions queued: %0d, forward stall clocks: %0d", n_rep, max_count, n_stall);
    checks++;
    if (n_rep < 100 || max_count < PD) begin failures++; $display("FAIL: too few matches or FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
