// tb_xav_workload: the engine at its default size (64 matching units, 6 STT
// copies, no parameter overrides) on a workload shaped like the published
// evaluation of the small rule sets: about 300 rules of 40-odd characters
// and random traffic.
//
// The published rule sets themselves are not available, so the testbench
// generates 300 random lsRE fragments: a front part of 3 to 14 lower-case
// letters and a back part of up to 8 digits or letters (the literals fall
// into all three filter lengths 2, 4 and 8). The traffic is "Random"
// traffic: 400 packets of 512 to 1500 random bytes, about one in three with
// one or two planted fragments so that the anchor DFA does some work. Every
// fragment match is checked against a brute-force search, and the
// aggregate rate over the whole run must reach the published 75 Gbit/s at
// 200 MHz (46.9 bytes per clock).
module tb_xav_workload;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  localparam int N  = 64;   // the design's defaults, not passed to it
  localparam int M  = 6;
  localparam int IB = 64;
  localparam int NPKT = 400;       // packets of random traffic
  localparam int NFRAG = 300;      // generated lsRE fragments
  localparam real RATE_MIN = 75.0e9 / 8.0 / 200.0e6;  // bytes per clock required

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
    repeat (4000000) @(posedge clk);
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

  function automatic string rand_word(int lo, int hi, bit digits_too);
    string s;
    int n;
    s = "";
    n = $urandom_range(lo, hi);
    for (int i = 0; i < n; i++)
      s = {s, (digits_too && $urandom_range(1)) ? "#" : string'(8'("a" + $urandom_range(25)))};
    return s;
  endfunction

  initial begin
    int n_exp, bytes, n_planted;
    longint t0, t1;
    r = new();
    while (r.front.size() < NFRAG) begin
      string f;
      f = rand_word(3, 14, 0);
      if (!(f inside {r.front})) r.add(f, ($urandom_range(2) == 0) ? "" : rand_word(1, 8, 1));
    end
    r.compile();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_rules(r);
    $display("rules: %0d fragments (%0d / %0d / %0d literals of length 2 / 4 / 8), %0d STT states",
             r.front.size(), r.n2, r.n4, r.n8, r.nstates);

    ready_pct = 100;
    bytes = 0;
    n_planted = 0;
    @(posedge clk);
    t0 = $time;
    for (int p = 0; p < NPKT; p++) begin
      automatic byte pkt [$];
      int len;
      len = $urandom_range(512, 1500);
      for (int i = 0; i < len; i++) pkt.push_back(byte'($urandom_range(255)));
      if (p % 3 == 0)
        for (int k = 0; k < 1 + (p % 2); k++) begin
          int f;
          string s;
          f = $urandom_range(r.front.size() - 1);
          s = r.front[f];
          for (int j = 0; j < r.back[f].len(); j++) s = {s, (r.back[f][j] == "#") ? digits(1) : string'(r.back[f][j])};
          put(pkt, $urandom_range(len - 1), s);
          n_planted++;
        end
      pkts.push_back(pkt);
      bytes += len;
      send(pkt, 0);
    end
    wait_idle();
    t1 = $time - 20*10;
    $display("traffic: %0d packets, %0d bytes in %0d clocks = %0.1f bytes per clock, %0d fragments planted",
             NPKT, bytes, (t1 - t0)/10, real'(bytes) / (real'(t1 - t0) / 10.0), n_planted);
    check(real'(bytes) / (real'(t1 - t0) / 10.0) >= RATE_MIN, $sformatf("aggregate rate below %0.2f bytes per clock", RATE_MIN));

    n_exp = 0;
    foreach (pkts[p]) begin
      automatic longint exp [$];
      int pid;
      pid = p;
      r.expect_matches(pkts[p], exp);
      n_exp += exp.size();
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
    $display("fragment matches: %0d; events: filter hits %0d, STT wait %0d", n_exp, n_hit, n_wait);
    check(n_exp >= 100, "too few fragment matches");
    check(n_hit > 0, "no pre-filter hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
