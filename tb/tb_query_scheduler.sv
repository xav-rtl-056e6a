// tb_query_scheduler: checks the query scheduler together with real STT
// copies, at the default 128 requesters and 6 copies.
//
// The copies are loaded with a random table for states 0..15. Every
// requester is a small process that raises a random query with some
// probability (high in the first half of the run, low in the second),
// holds it until granted and then waits for its result. The testbench
// checks every result (value from the table, information word, arrival
// exactly two clocks after the grant, only to the requester that asked),
// that no more than 6 requests are granted per clock and that 6 are granted
// whenever at least 6 are waiting, and that no request waits longer than
// the round-robin bound of ceil(128/6) clocks.
module tb_query_scheduler;
  import xav_pkg::*;

  localparam int N = 128, M = 6, TW = $clog2(N), NS = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]  req = '0, gnt, rsp_valid;
  stt_query_t    query [N];
  stt_resp_t     rsp [N];
  logic [M-1:0]  cp_valid, cp_r_valid;
  stt_query_t    cp_query [M];
  logic [TW-1:0] cp_tag [M], cp_r_tag [M];
  stt_resp_t     cp_r [M];

  logic               trans_wr = 1'b0, info_wr = 1'b0;
  logic [STATE_W+7:0] trans_addr = '0;
  logic [STATE_W-1:0] trans_data = '0, info_addr = '0;
  stt_info_t          info_data = '0;

  query_scheduler #(.N_REQ(N), .M_COPIES(M)) dut (.*);
  for (genvar k = 0; k < M; k++) begin : g_cp
    stt_copy #(.TAG_W(TW)) u_cp (
      .clk, .rst_n, .q_valid(cp_valid[k]), .q(cp_query[k]), .q_tag(cp_tag[k]),
      .r_valid(cp_r_valid[k]), .r(cp_r[k]), .r_tag(cp_r_tag[k]),
      .trans_wr, .trans_addr, .trans_data, .info_wr, .info_addr, .info_data);
  end

  int        tr_m [NS*256];
  stt_info_t in_m [NS];

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  int  cyc = 0, prob = 90, max_wait = 0, n_res = 0, n_full = 0;
  bit  running = 0;
  int  waiting [N];     // clocks the request has waited, -1 when not requesting
  int  gnt_cyc [N];     // clock of the outstanding grant, -1 when none
  stt_query_t held [N];

  initial for (int i = 0; i < N; i++) begin
    waiting[i] = -1; gnt_cyc[i] = -1; query[i] = '0; held[i] = '0;
  end

  // requesters
  always @(negedge clk) if (running) begin
    for (int i = 0; i < N; i++) begin
      if (!req[i] && gnt_cyc[i] < 0 && $urandom_range(99) < prob) begin
        req[i]   = 1'b1;
        query[i] = '{state: STATE_W'($urandom_range(NS-1)), symbol: 8'($urandom)};
        held[i]  = query[i];
        waiting[i] = 0;
      end
    end
  end

  always @(posedge clk) begin
    int ng, nr;
    cyc++;
    if (running) begin
      ng = $countones(gnt); nr = $countones(req);
      check(ng <= M, "more grants than copies");
      check(ng == ((nr < M) ? nr : M), "a copy left idle while requests wait");
      if (ng == M) n_full++;
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) check(req[i], "grant without request");
        if (req[i]) begin
          if (gnt[i]) begin
            req[i] <= 1'b0;
            gnt_cyc[i] = cyc;
            if (waiting[i] > max_wait) max_wait = waiting[i];
            waiting[i] = -1;
          end else waiting[i]++;
        end
        if (rsp_valid[i]) begin
          int n;
          n = tr_m[int'(held[i].state)*256 + int'(held[i].symbol)];
          check(gnt_cyc[i] >= 0 && cyc - gnt_cyc[i] == 2, $sformatf("result to requester %0d at wrong time", i));
          check(int'(rsp[i].next) == n && rsp[i].info == ((n == 0) ? '0 : in_m[n]),
                $sformatf("wrong result to requester %0d", i));
          gnt_cyc[i] = -1;
          n_res++;
        end else if (gnt_cyc[i] >= 0) check(cyc - gnt_cyc[i] < 2, $sformatf("result to requester %0d missing", i));
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NS; s++) begin
      in_m[s] = '{accept: 1'($urandom), frag: FRAG_W'($urandom), fwd_start: STATE_W'($urandom)};
      @(negedge clk);
      info_wr = 1'b1; info_addr = STATE_W'(s); info_data = in_m[s];
      for (int c = 0; c < 256; c++) begin
        tr_m[s*256 + c] = $urandom_range(NS-1);
        @(negedge clk);
        info_wr = 1'b0;
        trans_wr = 1'b1; trans_addr = (STATE_W+8)'(s*256 + c); trans_data = STATE_W'(tr_m[s*256 + c]);
      end
    end
    @(negedge clk);
    trans_wr = 1'b0;
    running = 1;
    repeat (3000) @(negedge clk);
    prob = 3;
    repeat (3000) @(negedge clk);
    prob = 0;
    repeat (10) @(negedge clk);
    running = 0;
    $display("results: %0d, clocks with all copies busy: %0d, longest wait: %0d", n_res, n_full, max_wait);
    check(max_wait <= (N + M - 1) / M, "a request waited longer than the round-robin bound");
    check(n_full > 1000 && n_res > 20000, "too little traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
