// tb_xfu: checks the 8-byte xor filter unit.
//
// Builds an xor filter for 4500 random 8-byte keys by peeling (software
// construction of tb_xav_pkg), loads it and the seed, and looks up every
// inserted key (each must hit: no false negatives) and 20000 random keys
// (each must agree with the software membership test, and the false
// positive share must stay near 2^-8). Results are checked 3 clocks after
// their key.
module tb_xfu;
  import xav_pkg::*;
  import tb_xav_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        key_valid = 1'b0, hit_valid, hit, wr_en = 1'b0, seed_wr = 1'b0;
  logic [63:0] key = '0, seed_data = '0;
  logic [SEG_W+1:0] wr_addr = '0;
  logic [7:0]  wr_data = '0;

  xfu #(.KEY_BYTES(8)) dut (.*);

  int checks = 0, failures = 0, fp_hits = 0, n_rand = 0;
  initial begin
    repeat (450000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] keys [$];
  logic [7:0]  tbl [3*SEG];
  logic [63:0] seed;

  // expected results, in order, with the clock of their key
  bit exp_q [$];
  bit kind_q [$];   // 1 = inserted key
  int cyc_q [$];    // clock of the key
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (hit_valid && rst_n) begin
      bit e, k;
      int c;
      e = exp_q.pop_front();
      k = kind_q.pop_front();
      c = cyc_q.pop_front();
      checks++;
      if (cyc - c != 3) begin
        failures++;
        if (failures < 10) $display("FAIL: latency %0d, expected 3", cyc - c);
      end
      checks++;
      if (hit != e) begin
        failures++;
        if (failures < 10) $display("FAIL: hit %0b expected %0b (inserted %0b)", hit, e, k);
      end
      if (!k) begin n_rand++; fp_hits += int'(hit); end
    end
  end

  initial begin
    for (int i = 0; i < 4500; i++) keys.push_back({$urandom, $urandom});
    seed = 64'h77;
    while (!xav_rules::build_xor(keys, seed, tbl)) seed = seed + 1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 3*SEG; s++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = (SEG_W+2)'(((s / SEG) << SEG_W) + (s % SEG)); wr_data = tbl[s];
    end
    @(negedge clk);
    wr_en = 1'b0; seed_wr = 1'b1; seed_data = seed;
    @(negedge clk);
    seed_wr = 1'b0;
    for (int i = 0; i < 24500; i++) begin
      @(negedge clk);
      if (i < 4500) key = keys[i]; else key = {$urandom, $urandom};
      key_valid = 1'b1;
      exp_q.push_back((i < 4500) ? 1'b1 : xav_rules::xor_member(key, seed, tbl));
      kind_q.push_back(i < 4500);
      cyc_q.push_back(cyc + 1);   // sampled at the next edge
    end
    @(negedge clk);
    key_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    checks++;
    $display("false positives: %0d of %0d", fp_hits, n_rand);
    if (fp_hits > n_rand / 100) begin failures++; $display("FAIL: false-positive share too high"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
