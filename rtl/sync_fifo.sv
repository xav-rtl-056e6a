// sync_fifo: single-clock first-in first-out queue.
//
// A circular buffer of DEPTH entries (DEPTH a power of two) with a
// first-word-fall-through output: rd_data shows the oldest entry whenever
// empty is low, and rd_en removes it. A write to a full queue or a read from
// an empty one is a caller error and is flagged by an assertion. count gives
// the number of stored entries, for callers that need an almost-full level.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full)  wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  assign rd_data = mem[rp[AW-1:0]];
  assign count   = wp - rp;
  assign empty   = (wp == rp);
  assign full    = (count == (AW+1)'(DEPTH));

  no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
