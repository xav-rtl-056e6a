// tb_matching_unit: checks one matching unit (packet buffer, pre-filter,
// anchor DFA engine and report FIFO) at its default sizes.
//
// The pre-filter tables are loaded over the configuration bus from the
// default rule set; the two STT ports are served by the behavioural model
// tb_stt_model. Packets are written as the input scheduler writes them, in
// 64-byte beats, sometimes back to back and sometimes slowly, and reports
// are taken with random back-pressure (including a long pause). For every
// packet the reports must equal, as a set, the brute-force fragment matches
// and carry the packet id. A packet without any literal must be scanned at
// one byte per clock: the unit is idle again at most 8 clocks after its
// length in clocks. Each of the unit's events (filter hit, scan hold,
// forward stall, report FIFO full) must happen at least once.
module tb_matching_unit;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  localparam int IB = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               unit_idle;
  logic               wr_en = 1'b0, wr_first = 1'b0, wr_last = 1'b0;
  logic [4:0]         wr_beat = '0;
  logic [6:0]         wr_nbytes = '0;
  logic [IB-1:0][7:0] wr_data = '0;
  logic [PKT_W-1:0]   wr_pkt = '0;
  logic               cfg_valid = 1'b0;
  cfg_sel_e           cfg_sel = CFG_DFU;
  logic [23:0]        cfg_addr = '0;
  logic [63:0]        cfg_data = '0;
  logic [1:0]         q_req, q_gnt, r_valid;
  stt_query_t         q [2];
  stt_resp_t          r [2];
  logic               rep_valid, rep_ready = 1'b1;
  report_t            rep;
  logic               ev_filter_hit, ev_scan_hold, ev_fwd_stall, ev_rep_full;

  matching_unit dut (.*);
  tb_stt_model #(.NP(2)) stt (.clk, .q_req, .q, .q_gnt, .r_valid, .r);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  int ready_pct = 80;
  always @(negedge clk) rep_ready = ($urandom_range(99) < ready_pct);

  longint got [$];
  int     n_hit = 0, n_hold = 0, n_stall = 0, n_full = 0, bad_pkt = 0;
  always @(posedge clk) if (rst_n) begin
    if (rep_valid && rep_ready) begin
      got.push_back(longint'(rep.frag) * 64'h1000000 + longint'(rep.start_pos) * 64'h1000 + longint'(rep.end_pos));
      if (rep.pkt != wr_pkt) bad_pkt++;
    end
    n_hit   += int'(ev_filter_hit);
    n_hold  += int'(ev_scan_hold);
    n_stall += int'(ev_fwd_stall);
    n_full  += int'(ev_rep_full);
  end

  task automatic cfg(cfg_sel_e s, int addr, logic [63:0] d);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_sel = s; cfg_addr = 24'(addr); cfg_data = d;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  // write a packet into the unit, gap idle clocks between beats;
  // returns the clock count from the first beat to idle
  task automatic run(byte pkt [$], int id, int gap, output int clocks);
    int nb;
    nb = (pkt.size() + IB - 1) / IB;
    got.delete();
    @(negedge clk);
    while (!unit_idle) @(negedge clk);
    clocks = 0;
    for (int b = 0; b < nb; b++) begin
      wr_en = 1'b1; wr_first = (b == 0); wr_last = (b == nb - 1); wr_beat = 5'(b);
      wr_pkt = PKT_W'(id);
      wr_nbytes = 7'((b == nb - 1) ? pkt.size() - IB*b : IB);
      for (int i = 0; i < IB; i++) wr_data[i] = (IB*b + i < pkt.size()) ? 8'(pkt[IB*b + i]) : 8'h00;
      @(negedge clk);
      clocks++;
      wr_en = 1'b0;
      repeat (gap) begin @(negedge clk); clocks++; end
    end
    while (!unit_idle) begin @(negedge clk); clocks++; end
    while (rep_valid) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  xav_rules rules;
  initial begin
    int n_rep = 0, clocks;
    rules = default_rules();
    rules.compile();
    g_rules = rules;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 1024; w++) cfg(CFG_DFU, w, rules.dfu_words[w]);
    for (int s = 0; s < 3*SEG; s++) cfg(CFG_XFU4, s, 64'(rules.x4[s]));
    for (int s = 0; s < 3*SEG; s++) cfg(CFG_XFU8, s, 64'(rules.x8[s]));
    cfg(CFG_XFU4_SEED, 0, rules.seed4);
    cfg(CFG_XFU8_SEED, 0, rules.seed8);
    for (int t = 0; t < 50; t++) begin
      automatic byte    pkt [$];
      automatic longint exp [$];
      int gap;
      gap = (t == 29) ? 150 : (t % 4 == 1) ? 25 : 0;
      if (t == 20) begin
        // dense: a literal every 4 bytes, reports held back for a while
        automatic string pat = "zqAB";
        for (int i = 0; i < 600; i++) pkt.push_back(byte'(pat[i % 4]));
        ready_pct = 0;
        fork begin repeat (3000) @(negedge clk); ready_pct = 80; end join_none
      end else if (t == 29) begin
        // a front part ends on the last byte of a beat; its back part
        // arrives 150 clocks later, so the forward thread must wait
        automatic string s = "user=12345678";
        make_packet(rules, 300, 0, pkt);
        for (int i = 0; i < s.len(); i++) pkt[59 + i] = byte'(s[i]);
      end else make_packet(rules, $urandom_range(1, 2048), $urandom_range(0, 12), pkt);
      rules.expect_matches(pkt, exp);
      run(pkt, 1000 + t, gap, clocks);
      got.sort(); exp.sort();
      checks++;
      n_rep += exp.size();
      if (got != exp) begin
        failures++;
        if (failures < 10) $display("FAIL packet %0d: %0d reports, %0d expected; got %p expected %p", t, got.size(), exp.size(), got, exp);
      end
    end
    // one byte per clock on a packet without literals
    for (int t = 0; t < 3; t++) begin
      automatic byte pkt [$];
      for (int i = 0; i < 500 + 700*t; i++) pkt.push_back(8'h77);
      run(pkt, 2000 + t, 0, clocks);
      check(clocks <= pkt.size() + 8, $sformatf("%0d-byte clean packet took %0d clocks", pkt.size(), clocks));
    end
    check(bad_pkt == 0, "report with the wrong packet id");
    $display("matches: %0d, filter hits: %0d, scan hold: %0d, forward stall: %0d, report FIFO full: %0d",
             n_rep, n_hit, n_hold, n_stall, n_full);
    check(n_hit > 0 && n_hold > 0 && n_stall > 0 && n_full > 0, "an event never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
