// packet_buffer: storage for the packet a matching unit is working on.
//
// The input scheduler writes a packet in beats of IN_BYTES bytes; beat b
// lands at byte addresses b*IN_BYTES and up, and only the first wr_nbytes
// bytes of a beat are written. Three byte-wide synchronous read ports serve
// the filter scan, the reverse DFA and the forward DFA, so the three never
// wait for each other (on an FPGA: replicated block RAM).
// The paper needs the packet to be held, since the reverse DFA reads
// backwards from a matching position, but does not describe the buffer;
// its size (PKT_MAX = 2048 bytes) and ports are this design's choices.
//
// Timing: rd_addr_k in one cycle, rd_data_k in the next.
module packet_buffer #(
  parameter int unsigned PKT_MAX  = 2048,
  parameter int unsigned IN_BYTES = 64,
  localparam int unsigned AW = $clog2(PKT_MAX),
  localparam int unsigned BW = $clog2(PKT_MAX / IN_BYTES),
  localparam int unsigned NW = $clog2(IN_BYTES + 1)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [BW-1:0]            wr_beat,
  input  logic [NW-1:0]            wr_nbytes,
  input  logic [IN_BYTES-1:0][7:0] wr_data,
  input  logic [AW-1:0]            rd_addr [3],
  output logic [7:0]               rd_data [3]
);
  localparam int unsigned BEATS = PKT_MAX / IN_BYTES;

  // organised as IN_BYTES byte lanes, each BEATS deep
  logic [7:0] lane [IN_BYTES][BEATS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int i = 0; i < IN_BYTES; i++) begin
        if (i < int'(wr_nbytes)) lane[i][wr_beat] <= wr_data[i];
      end
    end
  end

  localparam int unsigned LW = $clog2(IN_BYTES);

  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      rd_data[k] <= lane[rd_addr[k][LW-1:0]][rd_addr[k][AW-1:LW]];
    end
  end
endmodule
