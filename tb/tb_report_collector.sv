// tb_report_collector: checks the report collector with 8 input queues.
//
// Each input is a queue of numbered reports that offers its head with
// in_valid and drops it when in_ready is seen. Reports enter the queues at
// random and the output is back-pressured at random. The testbench checks
// that every report comes out exactly once and, per input, in order; that
// at most one input is acknowledged per clock and only a valid one; that
// the output holds while not taken; that with a free output one report is
// taken per clock whenever one waits; and the round-robin order.
module tb_report_collector;
  import xav_pkg::*;

  localparam int N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] in_valid, in_ready;
  report_t      in_rep [N];
  logic         out_valid, out_ready = 1'b0;
  report_t      out_rep;

  report_collector #(.N_UNITS(N)) dut (.*);

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

  report_t q [N][$];
  int      next_in [N], next_out [N];
  int      rate = 30, n_out = 0, rr = 0;
  bit      prev_hold = 0;
  report_t prev_rep;

  always_comb for (int i = 0; i < N; i++) begin
    in_valid[i] = (q[i].size() > 0);
    in_rep[i]   = (q[i].size() > 0) ? q[i][0] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    int u, e;
    check($countones(in_ready) <= 1, "more than one input taken");
    check((in_ready & ~in_valid) == '0, "empty input acknowledged");
    if (prev_hold) check(out_valid && out_rep == prev_rep, "output changed while held");
    if ((!out_valid || out_ready) && in_valid != '0) check(in_ready != '0, "report waits while output free");
    u = -1;
    for (int i = 0; i < N; i++) if (in_ready[i]) u = i;
    if (u >= 0) begin
      e = -1;
      for (int i = 0; i < N; i++) if (e < 0 && in_valid[(rr + i) % N]) e = (rr + i) % N;
      check(u == e, "not round robin");
      rr = (u + 1) % N;
      void'(q[u].pop_front());
    end
    if (out_valid && out_ready) begin
      int src;
      src = int'(out_rep.pkt);
      check(src < N && int'(out_rep.frag) == next_out[src], "report lost, repeated or out of order");
      if (src < N) next_out[src] = int'(out_rep.frag) + 1;
      n_out++;
    end
    prev_hold = out_valid && !out_ready;
    prev_rep  = out_rep;
  end

  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom_range(99) < 70);
    for (int i = 0; i < N; i++)
      if ($urandom_range(99) < rate) begin
        q[i].push_back('{pkt: PKT_W'(i), frag: FRAG_W'(next_in[i]), start_pos: POS_W'($urandom), end_pos: POS_W'($urandom)});
        next_in[i]++;
      end
  end

  initial begin
    for (int i = 0; i < N; i++) begin next_in[i] = 0; next_out[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3000) @(negedge clk);
    rate = 4;
    repeat (3000) @(negedge clk);
    rate = 0;
    while (in_valid != '0 || out_valid) @(negedge clk);
    repeat (5) @(negedge clk);
    for (int i = 0; i < N; i++) check(next_out[i] == next_in[i], $sformatf("input %0d: %0d of %0d reports out", i, next_out[i], next_in[i]));
    $display("reports: %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
