// xor_filter: the pre-filter of one matching unit.
//
// Packet bytes arrive one per clock. The filter keeps the last eight bytes
// of the current packet in a window and looks them up in three units at
// once: the direct filter unit on the last 2 bytes, one xor filter unit on
// the last 4 and one on the last 8. A hit in any unit means that some
// extracted literal (ldRE) of the rule set may end at this byte, and the
// byte's position is reported as a matching position. Windows that would
// reach back nprev the start of the packet do not hit.
// The DFU/XFU(4)/XFU(8) structure follows the paper. Reporting the position
// of the literal's last byte is this design's reading of the paper: the
// anchor DFA runs backwards from that byte and forwards from the next.
//
// Timing: in_* in cycle 0 -> hit_valid/hit_pos in cycle 3 (fixed latency,
// no back-pressure; the caller throttles the input instead).
// Programming: the configuration bus writes the DFU bitmap, the two XFU
// tables and the two XFU seeds (see xav_pkg::cfg_sel_e).
module xor_filter
  import xav_pkg::*;
#(
  parameter int unsigned P_W = xav_pkg::POS_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,   // first byte of a packet
  input  logic [7:0]       in_byte,
  input  logic [P_W-1:0]   in_pos,
  output logic             hit_valid,  // a byte was looked up 3 clocks ago
  output logic             hit,        // ... and one of the units hit
  output logic [P_W-1:0]   hit_pos,
  // configuration bus
  input  logic             cfg_valid,
  input  cfg_sel_e         cfg_sel,
  input  logic [23:0]      cfg_addr,
  input  logic [63:0]      cfg_data
);
  // window of the previous seven bytes; win[0] is the byte just nprev in_byte
  logic [7:0] win [7];
  logic [2:0] seen;   // bytes of this packet already in the window, saturates at 7

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen <= '0;
      for (int i = 0; i < 7; i++) win[i] <= '0;
    end else if (in_valid) begin
      win[0] <= in_byte;
      for (int i = 1; i < 7; i++) win[i] <= win[i-1];
      if (in_first)          seen <= 3'd1;
      else if (seen != 3'd7) seen <= seen + 3'd1;
    end
  end

  // bytes of the packet available nprev in_byte (0 at the first byte)
  logic [2:0] nprev;
  assign nprev = in_first ? 3'd0 : seen;

  logic [15:0] key2;
  logic [63:0] key4, key8;
  assign key2 = {win[0], in_byte};
  assign key4 = {32'd0, win[2], win[1], win[0], in_byte};
  assign key8 = {win[6], win[5], win[4], win[3], win[2], win[1], win[0], in_byte};

  logic ok2, ok4, ok8;
  assign ok2 = nprev >= 3'd1;
  assign ok4 = nprev >= 3'd3;
  assign ok8 = nprev == 3'd7;

  logic dfu_v, dfu_hit, x4_v, x4_hit, x8_v, x8_hit;

  dfu u_dfu (
    .clk, .rst_n,
    .key_valid (in_valid),
    .key       (key2),
    .hit_valid (dfu_v),
    .hit       (dfu_hit),
    .wr_en     (cfg_valid && cfg_sel == CFG_DFU),
    .wr_addr   (cfg_addr[9:0]),
    .wr_data   (cfg_data)
  );

  xfu #(.KEY_BYTES(4)) u_xfu4 (
    .clk, .rst_n,
    .key_valid (in_valid),
    .key       (key4),
    .hit_valid (x4_v),
    .hit       (x4_hit),
    .wr_en     (cfg_valid && cfg_sel == CFG_XFU4),
    .wr_addr   (cfg_addr[SEG_W+1:0]),
    .wr_data   (cfg_data[FP_W-1:0]),
    .seed_wr   (cfg_valid && cfg_sel == CFG_XFU4_SEED),
    .seed_data (cfg_data)
  );

  xfu #(.KEY_BYTES(8)) u_xfu8 (
    .clk, .rst_n,
    .key_valid (in_valid),
    .key       (key8),
    .hit_valid (x8_v),
    .hit       (x8_hit),
    .wr_en     (cfg_valid && cfg_sel == CFG_XFU8),
    .wr_addr   (cfg_addr[SEG_W+1:0]),
    .wr_data   (cfg_data[FP_W-1:0]),
    .seed_wr   (cfg_valid && cfg_sel == CFG_XFU8_SEED),
    .seed_data (cfg_data)
  );

  // align the 1-cycle DFU result and the window masks with the 3-cycle XFUs
  logic [P_W-1:0] pos_d [3];
  logic [2:0]     ok_d  [3];   // {ok8, ok4, ok2}
  logic           dfu_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) begin pos_d[i] <= '0; ok_d[i] <= '0; end
      dfu_d <= 1'b0;
    end else begin
      pos_d[0] <= in_pos;            ok_d[0] <= {ok8, ok4, ok2};
      pos_d[1] <= pos_d[0];          ok_d[1] <= ok_d[0];
      pos_d[2] <= pos_d[1];          ok_d[2] <= ok_d[1];
      dfu_d    <= dfu_hit & ok_d[0][0];
    end
  end

  logic dfu_dd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dfu_dd <= 1'b0;
    else        dfu_dd <= dfu_d;
  end

  assign hit_valid = x4_v;
  assign hit       = x4_v && (dfu_dd || (x4_hit && ok_d[2][1]) || (x8_hit && ok_d[2][2]));
  assign hit_pos   = pos_d[2];

  // the three units run in lock step
  always_comb assert (!rst_n || (x4_v == x8_v));
  logic unused;
  assign unused = ^{dfu_v, cfg_addr[23:SEG_W+2]};
endmodule
