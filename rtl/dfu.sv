// dfu: direct filter unit of the xor filter (length-2 literals).
//
// A bitmap of 2^16 bits, one per possible pair of bytes. The compiler sets
// the bit of every 2-byte literal it extracted from an lsRE fragment; the
// lookup reads the bit addressed by the last two bytes of the packet window.
// The bitmap size follows the paper; the 64-bit word write port, the byte
// order in the index (older byte in key[15:8]) and the one-cycle read are
// this design's choices.
//
// Interface: key/key_valid in; hit/hit_valid one clock later.
// Programming: wr_en writes wr_data to word wr_addr (2^16 / WORD_W words).
module dfu #(
  parameter int unsigned WORD_W = 64
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // lookup
  input  logic                               key_valid,
  input  logic [15:0]                        key,
  output logic                               hit_valid,
  output logic                               hit,
  // programming
  input  logic                               wr_en,
  input  logic [$clog2(65536/WORD_W)-1:0]    wr_addr,
  input  logic [WORD_W-1:0]                  wr_data
);
  localparam int unsigned WORDS = 65536 / WORD_W;
  localparam int unsigned BIT_W = $clog2(WORD_W);

  logic [WORD_W-1:0] bitmap [WORDS];
  logic [WORD_W-1:0] rd_word;
  logic [BIT_W-1:0]  rd_bit;

  always_ff @(posedge clk) begin
    if (wr_en) bitmap[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    rd_word <= bitmap[key[15:BIT_W]];
    rd_bit  <= key[BIT_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hit_valid <= 1'b0;
    else        hit_valid <= key_valid;
  end

  assign hit = hit_valid & rd_word[rd_bit];
endmodule
