// tb_xor_filter: checks the pre-filter of a matching unit.
//
// Loads the filter tables compiled from the default rule set, streams
// packets (random bytes with planted literals, with idle clocks in between)
// and checks for every byte, 3 clocks later, that the reported hit equals
// the software model: the DFU bit of the last 2 bytes, or xor filter
// membership of the last 4 or 8 bytes, counting only bytes of the same
// packet. Every planted literal must hit.
module tb_xor_filter;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             in_valid = 1'b0, in_first = 1'b0, hit_valid, hit;
  logic [7:0]       in_byte = '0;
  logic [POS_W-1:0] in_pos = '0, hit_pos;
  logic             cfg_valid = 1'b0;
  cfg_sel_e         cfg_sel = CFG_DFU;
  logic [23:0]      cfg_addr = '0;
  logic [63:0]      cfg_data = '0;

  xor_filter dut (.*);

  int checks = 0, failures = 0, n_hits = 0;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(cfg_sel_e s, int addr, logic [63:0] d);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_sel = s; cfg_addr = 24'(addr); cfg_data = d;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  xav_rules r;

  function automatic bit model_hit(byte w [$]);   // w: bytes of the packet up to this one
    logic [63:0] k;
    int n;
    bit h;
    n = w.size();
    h = 0;
    k = '0;
    for (int i = (n > 8 ? n - 8 : 0); i < n; i++) k = {k[55:0], 8'(w[i])};
    if (n >= 2) h |= r.dfu_words[k[15:6]][k[5:0]];
    if (n >= 4) h |= xav_rules::xor_member({32'd0, k[31:0]}, r.seed4, r.x4);
    if (n >= 8) h |= xav_rules::xor_member(k, r.seed8, r.x8);
    return h;
  endfunction

  bit exp_q [$];
  int pos_q [$];
  bit must_q [$];
  int cyc = 0;
  int cyc_q [$];
  always @(posedge clk) begin
    cyc++;
    if (hit_valid && rst_n) begin
      bit e, m;
      int p, c;
      e = exp_q.pop_front(); p = pos_q.pop_front(); m = must_q.pop_front(); c = cyc_q.pop_front();
      checks++;
      if (hit != e || int'(hit_pos) != p || cyc - c != 3 || (m && !hit)) begin
        failures++;
        if (failures < 10) $display("FAIL pos %0d: hit %0b expected %0b (planted %0b), latency %0d", p, hit, e, m, cyc - c);
      end
      n_hits += int'(hit);
    end
  end

  initial begin
    r = default_rules();
    r.compile();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 1024; w++) cfg(CFG_DFU, w, r.dfu_words[w]);
    for (int s = 0; s < 3*SEG; s++) cfg(CFG_XFU4, s, 64'(r.x4[s]));
    for (int s = 0; s < 3*SEG; s++) cfg(CFG_XFU8, s, 64'(r.x8[s]));
    cfg(CFG_XFU4_SEED, 0, r.seed4);
    cfg(CFG_XFU8_SEED, 0, r.seed8);
    for (int p = 0; p < 60; p++) begin
      automatic byte pkt [$];
      automatic bit  planted [$];
      int len, f, at;
      len = $urandom_range(10, 300);
      for (int i = 0; i < len; i++) begin pkt.push_back(byte'($urandom)); planted.push_back(0); end
      f  = $urandom_range(r.front.size() - 1);
      at = $urandom_range(len - r.front[f].len());
      for (int i = 0; i < r.front[f].len(); i++) pkt[at + i] = byte'(r.front[f][i]);
      // planting may be overwritten by nothing else; its last byte must hit
      planted[at + r.front[f].len() - 1] = 1;
      for (int i = 0; i < len; i++) begin
        automatic byte w [$];
        @(negedge clk);
        in_valid = ($urandom_range(3) != 0) || (i == 0);
        while (!in_valid) begin
          @(negedge clk);
          in_valid = ($urandom_range(3) != 0);
        end
        in_first = (i == 0);
        in_byte  = 8'(pkt[i]);
        in_pos   = POS_W'(i);
        w = pkt[0:i];
        exp_q.push_back(model_hit(w));
        pos_q.push_back(i);
        must_q.push_back(planted[i]);
        cyc_q.push_back(cyc + 1);
      end
      @(negedge clk);
      in_valid = 1'b0;
    end
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("hits: %0d", n_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
