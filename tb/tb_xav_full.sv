// tb_xav_full: the end-to-end test of tb_xav_top run on the engine at its
// default size: 64 matching units and 6 STT copies, as in the paper.
//
// Same rule set, packets, reference search and event counts as tb_xav_top,
// with more packets so that all 64 units fill up, and a rate phase of 256
// packets. The engine is instantiated without parameter overrides.
module tb_xav_full;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  localparam int N  = 64;   // the design's defaults, not passed to it
  localparam int M  = 6;
  localparam int IB = 64;
  localparam int NPKT1 = 300;      // random packets in phase 1
  localparam int NPKT5 = 4 * N;    // packets in the rate phase
  localparam real RATE_MIN = 75.0e9 / 8.0 / 200.0e6;  // bytes per clock required in the rate phase

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  in_valid = 1'b0, in_ready, in_last = 1'b0;
  logic [IB-1:0][7:0]    in_data = '0;
  logic [6:0]            in_nbytes = '0;
  logic                  cfg_valid = 1'b0;
  cfg_sel_e              cfg_sel = CFG_DFU;
  logic [23:0]           cfg_addr = '0;
  logic [63:0]           cfg_data = '0;
  logic                  rep_valid, rep_ready = 1'b0;
  report_t               rep;
  logic ev_filter_hit, ev_all_busy, ev_scan_hold, ev_fwd_stall, ev_rep_full, ev_stt_wait, all_idle;

  xav_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event counters
  int n_hit, n_busy, n_hold, n_stall, n_full, n_wait;
  initial begin n_hit = 0; n_busy = 0; n_hold = 0; n_stall = 0; n_full = 0; n_wait = 0; end
  always @(posedge clk) begin
    n_hit   += int'(ev_filter_hit);
    n_busy  += int'(ev_all_busy);
    n_hold  += int'(ev_scan_hold);
    n_stall += int'(ev_fwd_stall);
    n_full  += int'(ev_rep_full);
    n_wait  += int'(ev_stt_wait);
  end

  // configuration
  task automatic cfg(cfg_sel_e s, int addr, logic [63:0] d);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_sel = s; cfg_addr = 24'(addr); cfg_data = d;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  task automatic load_rules(xav_rules r);
    for (int w = 0; w < 1024; w++) cfg(CFG_DFU, w, r.dfu_words[w]);
    for (int s = 0; s < 3*SEG; s++) cfg(CFG_XFU4, s, 64'(r.x4[s]));
    for (int s = 0; s < 3*SEG; s++) cfg(CFG_XFU8, s, 64'(r.x8[s]));
    cfg(CFG_XFU4_SEED, 0, r.seed4);
    cfg(CFG_XFU8_SEED, 0, r.seed8);
    for (int st = 0; st < r.nstates; st++) begin
      for (int c = 0; c < 256; c++) cfg(CFG_STT_TRANS, st*256 + c, 64'(r.next_state(st, byte'(c))));
      cfg(CFG_STT_INFO, st, 64'(r.state_info(st)));
    end
  endtask

  // packet input; gap = idle clocks between beats
  task automatic send(byte pkt [$], int gap);
    int nb;
    nb = (pkt.size() + IB - 1) / IB;
    @(negedge clk);
    for (int b = 0; b < nb; b++) begin
      in_valid  = 1'b1;
      in_last   = (b == nb - 1);
      in_nbytes = 7'((b == nb - 1) ? pkt.size() - b*IB : IB);
      for (int i = 0; i < IB; i++) in_data[i] = (b*IB + i < pkt.size()) ? 8'(pkt[b*IB + i]) : 8'h00;
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(negedge clk);   // the beat was taken at the clock edge in between
      if (gap > 0 || b == nb - 1) in_valid = 1'b0;
      if (gap > 0) repeat (gap) @(negedge clk);
    end
  endtask

  // report sink; ready_pct is the share of clocks the host accepts
  longint got [int][$];
  int ready_pct = 100;
  int n_reports = 0;
  always @(negedge clk) begin
    rep_ready = ($urandom_range(99) < ready_pct);
    #1;
    if (rep_valid && rep_ready) begin
      got[int'(rep.pkt)].push_back(longint'(rep.frag) * 64'h1000000 + longint'(rep.start_pos) * 64'h1000
                                   + longint'(rep.end_pos));
      n_reports++;
    end
  end

  function automatic void put(ref byte pkt [$], input int at, input string s);
    for (int i = 0; i < s.len(); i++) if (at + i < pkt.size()) pkt[at + i] = byte'(s[i]);
  endfunction

  function automatic string digits(int n);
    string s;
    s = "";
    for (int i = 0; i < n; i++) s = {s, string'(8'("0" + $urandom_range(9)))};
    return s;
  endfunction

  byte     pkts [$][$];
  int      npkt = 0;

  task automatic wait_idle();
    int quiet;
    quiet = 0;
    while (quiet < 20) begin
      @(posedge clk);
      if (all_idle) quiet++; else quiet = 0;
    end
  endtask

  xav_rules r;
  int n_nested = 0;

  initial begin
    r = default_rules();
    r.compile();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_rules(r);
    $display("rules: %0d fragments, %0d STT states", r.front.size(), r.nstates);

    // ---- phase 1: random packets with planted fragments ----
    ready_pct = 60;
    for (int p = 0; p < NPKT1; p++) begin
      automatic byte pkt [$];
      int len;
      len = (p == 7) ? 2100 : $urandom_range(20, 400);
      for (int i = 0; i < len; i++) pkt.push_back(byte'($urandom_range(255)));
      for (int k = 0; k < 4; k++) begin
        int f;
        f = $urandom_range(r.front.size() - 1);
        put(pkt, $urandom_range(len - 1), {r.front[f], (r.back[f].len() > 0) ? digits(r.back[f].len()) : ""});
      end
      if (p % 5 == 0) begin put(pkt, 3, "XBODY"); n_nested++; end
      if (p == 7) put(pkt, 2040, "PARTIAL");          // runs past the 2048-byte buffer
      pkts.push_back(pkt);
      send(pkt, 0);
    end
    // ---- phase 2: dense hits fill the position queue ----
    begin
      automatic byte pkt [$];
      for (int i = 0; i < 300; i++) pkt.push_back(byte'((i % 2) ? "b" : "a"));
      put(pkt, 100, "abcd");
      pkts.push_back(pkt);
      send(pkt, 0);
    end
    // ---- phase 3: slow delivery, forward thread waits for bytes ----
    begin
      automatic byte pkt [$];
      for (int i = 0; i < 150; i++) pkt.push_back(8'h20);
      put(pkt, 57, "user=");
      put(pkt, 62, "12345678");
      put(pkt, 120, "zq");
      pkts.push_back(pkt);
      send(pkt, 200);
    end
    // ---- phase 4: host stops taking reports, report queues fill ----
    ready_pct = 0;
    for (int p = 0; p < 4; p++) begin
      automatic byte pkt [$];
      for (int i = 0; i < 200; i++) pkt.push_back(8'h2e);
      for (int k = 0; k < 12; k++) put(pkt, 10 + 15*k, "BODY");
      pkts.push_back(pkt);
      send(pkt, 0);
    end
    repeat (3000) @(posedge clk);
    ready_pct = 100;
    wait_idle();

    // ---- compare with the brute-force search ----
    foreach (pkts[p]) begin
      automatic byte cut [$];
      automatic longint exp [$];
      int pid;
      pid = p;
      cut = pkts[p];
      while (cut.size() > 2048) void'(cut.pop_back());
      r.expect_matches(cut, exp);
      if (!got.exists(pid)) got[pid] = {};
      check(got[pid].size() == exp.size(),
            $sformatf("packet %0d: %0d reports, expected %0d", pid, got[pid].size(), exp.size()));
      foreach (exp[i]) begin
        automatic int idx [$];
        idx = got[pid].find_first_index(x) with (x == exp[i]);
        check(idx.size() == 1, $sformatf("packet %0d: missing match %h", pid, exp[i]));
        if (idx.size() == 1) got[pid].delete(idx[0]);
      end
    end

    // ---- phase 5: scan rate, no matches ----
    begin
      longint t0, t1;
      int bytes;
      bytes = 0;
      @(posedge clk);
      t0 = $time;
      for (int p = 0; p < NPKT5; p++) begin
        automatic byte pkt [$];
        for (int i = 0; i < 1088; i++) pkt.push_back(byte'($urandom_range(128, 255)));
        pkts.push_back(pkt);
        bytes += 1088;
        send(pkt, 0);
      end
      wait_idle();
      t1 = $time - 20*10;
      $display("scan rate: %0d bytes in %0d clocks (%0d units)", bytes, (t1 - t0)/10, N);
      check(real'(bytes) / (real'(t1 - t0) / 10.0) >= RATE_MIN, $sformatf("aggregate scan rate below %0.2f bytes per clock", RATE_MIN));
    end

    $display("events: filter hits %0d, all units busy %0d, scan held %0d, forward stall %0d, report queue full %0d, STT wait %0d, nested fronts %0d, reports %0d",
             n_hit, n_busy, n_hold, n_stall, n_full, n_wait, n_nested, n_reports);
    check(n_hit   > 0, "no pre-filter hit");
    check(n_busy  > 0, "all units never busy");
    check(n_hold  > 0, "scan never held by a full position queue");
    check(n_stall > 0, "forward thread never waited for a byte");
    check(n_full  > 0, "report queue never full");
    check(n_wait  > 0, "no STT contention");
    check(n_nested > 0, "no nested front parts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
