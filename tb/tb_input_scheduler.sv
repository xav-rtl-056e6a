// tb_input_scheduler: checks the input scheduler with 8 modelled units.
//
// A unit model turns busy when it receives a packet's first beat and idle
// again a random time after the last beat. Random packets (1 to 2300
// bytes, so some exceed the 2048-byte buffer) are streamed in 64-byte
// beats with random gaps. From the write side the testbench rebuilds each
// packet in the unit it went to and checks: a new packet only goes to an
// idle unit, all its beats go to the same unit, beat numbers and byte
// counts are right (zero beyond the buffer), packet ids count up, the
// stored bytes equal the sent ones, and the round-robin choice of unit.
// It checks that in_ready is low exactly when a packet waits with every
// unit busy, and that this happened.
module tb_input_scheduler;
  import xav_pkg::*;

  localparam int N = 8, IB = 64, BEATS = 2048 / IB;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 in_valid = 1'b0, in_ready, in_last = 1'b0;
  logic [IB-1:0][7:0]   in_data = '0;
  logic [6:0]           in_nbytes = '0;
  logic [N-1:0]         unit_idle = '1, wr_en;
  logic                 wr_first, wr_last, ev_all_busy;
  logic [4:0]           wr_beat;
  logic [6:0]           wr_nbytes;
  logic [IB-1:0][7:0]   wr_data;
  logic [PKT_W-1:0]     wr_pkt;

  input_scheduler #(.N_UNITS(N), .IN_BYTES(IB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // unit models and the rebuilt packets
  int   hold [N];
  bit   got_last [N];
  int   cur_pkt [N];
  int   next_beat [N];
  byte  rebuilt [N][$];
  byte  sent [int][$];
  int   exp_pkt = 0, exp_unit = 0, n_busy = 0, n_done = 0;

  always @(posedge clk) if (rst_n) begin
    int u;
    // every unit busy and a packet waiting <=> in_ready low
    if (in_valid && wr_en == '0 && unit_idle == '0) n_busy++;
    check(ev_all_busy == (in_valid && !in_ready), "ev_all_busy differs from a stalled stream");
    check($countones(wr_en) <= 1, "beat written into more than one unit");
    u = -1;
    for (int i = 0; i < N; i++) if (wr_en[i]) u = i;
    check((u >= 0) == (in_valid && in_ready), "a beat accepted but not written, or the reverse");
    if (u >= 0) begin
      if (wr_first) begin
        int e;
        check(unit_idle[u], "new packet written into a busy unit");
        // round robin: the first idle unit from exp_unit on
        e = -1;
        for (int i = 0; i < N; i++) if (e < 0 && unit_idle[(exp_unit + i) % N]) e = (exp_unit + i) % N;
        check(u == e, $sformatf("unit %0d chosen, round robin gives %0d", u, e));
        exp_unit = (u + 1) % N;
        check(int'(wr_pkt) == exp_pkt, "packet id out of order");
        cur_pkt[u] = int'(wr_pkt);
        next_beat[u] = 0;
        rebuilt[u].delete();
        unit_idle[u] <= 1'b0;
        got_last[u] = 0;
      end else check(!unit_idle[u] && int'(wr_pkt) == cur_pkt[u], "continuation beat in a different unit");
      if (next_beat[u] < BEATS) check(int'(wr_beat) == next_beat[u], "wrong beat number");
      if (next_beat[u] < BEATS) begin
        check(wr_nbytes == in_nbytes, "byte count changed inside the buffer");
        for (int i = 0; i < int'(wr_nbytes); i++) rebuilt[u].push_back(byte'(wr_data[i]));
      end else check(wr_nbytes == 0, "beat beyond the buffer not cut");
      next_beat[u]++;
      if (wr_last) begin
        int want;
        want = (sent[cur_pkt[u]].size() > 2048) ? 2048 : sent[cur_pkt[u]].size();
        check(rebuilt[u].size() == want, "stored length wrong");
        for (int i = 0; i < rebuilt[u].size() && i < want; i++)
          if (rebuilt[u][i] != sent[cur_pkt[u]][i]) begin check(0, "stored byte wrong"); break; end
        exp_pkt++;
        n_done++;
        got_last[u] = 1;
        hold[u] = $urandom_range(0, 400);
      end
    end
    for (int i = 0; i < N; i++) if (!unit_idle[i] && got_last[i] && !(wr_en[i] && wr_first)) begin
      if (hold[i] == 0) unit_idle[i] <= 1'b1;
      else hold[i]--;
    end
  end

  task automatic send(int id, int len, int gap);
    int nb;
    nb = (len + IB - 1) / IB;
    sent[id].delete();
    for (int i = 0; i < len; i++) sent[id].push_back(byte'($urandom));
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_last = (b == nb - 1);
      in_nbytes = 7'((b == nb - 1) ? len - IB*b : IB);
      for (int i = 0; i < IB; i++) in_data[i] = (IB*b + i < len) ? 8'(sent[id][IB*b + i]) : 8'($urandom);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (gap) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 300; p++) send(p, (p % 23 == 5) ? $urandom_range(2049, 2300) : $urandom_range(1, 1500),
                                       (p < 150) ? 0 : $urandom_range(0, 30));
    repeat (500) @(negedge clk);
    $display("packets: %0d, clocks stalled with all units busy: %0d", n_done, n_busy);
    check(n_done == 300, "not every packet arrived");
    check(n_busy > 0, "all units never busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
