// tb_dfu: checks the direct filter unit against a software bitmap.
//
// Loads a random bitmap through the word write port, then looks up every
// 16-bit key once in random order plus a run of random keys, and checks
// each hit, one clock after its key, against the software copy.
module tb_dfu;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        key_valid = 1'b0, hit_valid, hit, wr_en = 1'b0;
  logic [15:0] key = '0;
  logic [9:0]  wr_addr = '0;
  logic [63:0] wr_data = '0;
  logic [63:0] model [1024];

  dfu dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare: key of the previous clock
  logic [15:0] key_d;
  logic        kv_d = 1'b0;
  always @(posedge clk) begin
    if (kv_d) begin
      checks++;
      if (!hit_valid || hit != model[key_d[15:6]][key_d[5:0]]) begin
        failures++;
        if (failures < 10) $display("FAIL key %h: hit %0b expected %0b", key_d, hit, model[key_d[15:6]][key_d[5:0]]);
      end
    end
    key_d <= key;
    kv_d  <= key_valid;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 1024; w++) begin
      model[w] = {$urandom, $urandom} & {$urandom, $urandom};   // about a quarter set
      @(negedge clk);
      wr_en = 1'b1; wr_addr = 10'(w); wr_data = model[w];
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int i = 0; i < 65536 + 2000; i++) begin
      @(negedge clk);
      key_valid = ($urandom_range(7) != 0);
      key = (i < 65536) ? 16'(i * 40503) : 16'($urandom);
    end
    @(negedge clk);
    key_valid = 1'b0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
