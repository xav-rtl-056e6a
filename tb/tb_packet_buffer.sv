// tb_packet_buffer: checks the packet buffer.
//
// Writes packets of random length in 64-byte beats (the last beat partial,
// with garbage beyond its byte count that must not be stored) and reads
// every byte back on all three read ports at random addresses, checking the
// data one clock after the address against a software copy.
module tb_packet_buffer;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              wr_en = 1'b0;
  logic [4:0]        wr_beat = '0;
  logic [6:0]        wr_nbytes = '0;
  logic [63:0][7:0]  wr_data = '0;
  logic [10:0]       rd_addr [3];
  logic [7:0]        rd_data [3];
  byte               model [2048];

  packet_buffer dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2048; i++) model[i] = 8'h5a;
    for (int k = 0; k < 3; k++) rd_addr[k] = '0;
    // fill the whole buffer once so every byte is defined
    for (int b = 0; b < 32; b++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_beat = 5'(b); wr_nbytes = 7'd64;
      for (int i = 0; i < 64; i++) wr_data[i] = 8'h5a;
    end
    for (int p = 0; p < 20; p++) begin
      int len, nb;
      len = $urandom_range(1, 2048);
      nb = (len + 63) / 64;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_beat = 5'(b);
        wr_nbytes = 7'((b == nb - 1) ? len - 64*b : 64);
        for (int i = 0; i < 64; i++) begin
          wr_data[i] = 8'($urandom);
          if (i < int'(wr_nbytes)) model[64*b + i] = byte'(wr_data[i]);
        end
      end
      @(negedge clk);
      wr_en = 1'b0;
      for (int i = 0; i < 600; i++) begin
        int a [3];
        for (int k = 0; k < 3; k++) begin
          a[k] = $urandom_range(2047);
          rd_addr[k] = 11'(a[k]);
        end
        @(negedge clk);
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (rd_data[k] != 8'(model[a[k]])) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d addr %0d: %h expected %h", k, a[k], rd_data[k], model[a[k]]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
