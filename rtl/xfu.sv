// xfu: xor filter unit for literals of KEY_BYTES bytes (4 or 8).
//
// A set-membership filter after the xor filter of Graf and Lemire: the table
// is split into three equal segments of 2^SEG_W fingerprints; a key x is in
// the set when fp(x) == T0[h0(x)] ^ T1[h1(x)] ^ T2[h2(x)]. Keys that were
// inserted always hit; other keys hit with probability 2^-FP_W. The host
// compiler builds the table by peeling and writes it through wr_*; it also
// chooses the seed (retrying another seed when peeling fails).
// The use of an xor filter and the lengths 4 and 8 follow the paper. The hash
// (murmur3 finaliser of key^seed, slots from bits 0/21/42), the 8-bit
// fingerprint and the 3 x 2048 table size are this design's choices. With
// the 8 KB direct filter a matching unit then holds 20 KB of filter tables,
// more than the largest published rule set needs (18.9 KB); a unit takes
// up to about 5000 literals of each length (1.23 slots per key).
//
// Pipeline: key in cycle 0 -> hash registered (1) -> three segment reads (2)
// -> compare, hit registered (3). hit_valid follows key_valid by 3 clocks.
module xfu #(
  parameter int unsigned KEY_BYTES = 4,
  parameter int unsigned SEG_W     = xav_pkg::SEG_W,
  parameter int unsigned FP_W      = xav_pkg::FP_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // lookup; key is right-aligned (upper bytes beyond KEY_BYTES are ignored)
  input  logic                   key_valid,
  input  logic [63:0]            key,
  output logic                   hit_valid,
  output logic                   hit,
  // programming: slot = {segment[1:0], index[SEG_W-1:0]}
  input  logic                   wr_en,
  input  logic [SEG_W+1:0]       wr_addr,
  input  logic [FP_W-1:0]        wr_data,
  input  logic                   seed_wr,
  input  logic [63:0]            seed_data
);
  localparam logic [63:0] KEY_MASK = (KEY_BYTES >= 8) ? '1 : ((64'd1 << (8*KEY_BYTES)) - 64'd1);

  logic [FP_W-1:0] seg0 [2**SEG_W];
  logic [FP_W-1:0] seg1 [2**SEG_W];
  logic [FP_W-1:0] seg2 [2**SEG_W];
  logic [63:0]     seed;

  // programming
  always_ff @(posedge clk) begin
    if (wr_en) begin
      case (wr_addr[SEG_W+1:SEG_W])
        2'd0:    seg0[wr_addr[SEG_W-1:0]] <= wr_data;
        2'd1:    seg1[wr_addr[SEG_W-1:0]] <= wr_data;
        default: seg2[wr_addr[SEG_W-1:0]] <= wr_data;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       seed <= '0;
    else if (seed_wr) seed <= seed_data;
  end

  // stage 1: hash
  logic [63:0] h1;
  logic        v1;
  always_ff @(posedge clk) h1 <= xav_pkg::xav_hash(key & KEY_MASK, seed);

  // stage 2: segment reads, fingerprint carried along
  logic [FP_W-1:0] r0, r1, r2, fp2;
  logic            v2;
  always_ff @(posedge clk) begin
    r0  <= seg0[h1[SEG_W-1:0]];
    r1  <= seg1[h1[21 +: SEG_W]];
    r2  <= seg2[h1[42 +: SEG_W]];
    fp2 <= FP_W'(h1 ^ (h1 >> 32));
  end

  // stage 3: compare
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; hit_valid <= 1'b0; hit <= 1'b0;
    end else begin
      v1        <= key_valid;
      v2        <= v1;
      hit_valid <= v2;
      hit       <= v2 && ((r0 ^ r1 ^ r2) == fp2);
    end
  end
endmodule
