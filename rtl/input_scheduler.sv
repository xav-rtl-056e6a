// input_scheduler: spreads the input packet stream over the matching units.
//
// The stream carries one packet after another in beats of IN_BYTES bytes
// (in_nbytes valid bytes per beat, in_last on the final beat). At the first
// beat of a packet the scheduler picks an idle unit, looking round robin
// from the unit after the one it used last, numbers the packet with a
// running packet id, and writes every beat of the packet into that unit.
// When no unit is idle at a packet's first beat, in_ready is low and the
// stream stalls. Beats beyond the unit's buffer (PKT_MAX bytes) are passed
// with a byte count of zero, so an oversized packet is cut at PKT_MAX bytes.
// The paper names the input scheduler and says that packets are distributed
// over the units; the policy, beat format and truncation are this design's.
//
// Timing: a beat is written into the chosen unit in the clock it is
// accepted; a unit reports busy from the next clock on.
module input_scheduler
  import xav_pkg::*;
#(
  parameter int unsigned N_UNITS  = 64,
  parameter int unsigned IN_BYTES = 64,
  localparam int unsigned UW      = $clog2(N_UNITS),
  localparam int unsigned BEATS   = (2**POS_W) / IN_BYTES,
  localparam int unsigned BW      = $clog2(BEATS),
  localparam int unsigned NW      = $clog2(IN_BYTES + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input packet stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [IN_BYTES-1:0][7:0] in_data,
  input  logic [NW-1:0]            in_nbytes,
  input  logic                     in_last,
  // to the matching units (data shared, enables one-hot)
  input  logic [N_UNITS-1:0]       unit_idle,
  output logic [N_UNITS-1:0]       wr_en,
  output logic                     wr_first,
  output logic                     wr_last,
  output logic [BW-1:0]            wr_beat,
  output logic [NW-1:0]            wr_nbytes,
  output logic [IN_BYTES-1:0][7:0] wr_data,
  output logic [PKT_W-1:0]         wr_pkt,
  // a first beat waited because every unit was busy
  output logic                     ev_all_busy
);
  logic             in_pkt;     // inside a packet
  logic [UW-1:0]    cur;        // unit of the current packet
  logic [UW-1:0]    rr;         // where the next search starts
  logic [BW:0]      beat;       // beats of the current packet so far
  logic [PKT_W-1:0] pkt_id;

  logic          found;
  logic [UW-1:0] pick;
  always_comb begin
    logic [UW-1:0] idx;
    found = 1'b0;
    pick  = rr;
    for (int i = 0; i < N_UNITS; i++) begin
      idx = UW'((int'(rr) + i) % N_UNITS);
      if (!found && unit_idle[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
  end

  logic [UW-1:0] unit;
  logic          fire;
  assign unit     = in_pkt ? cur : pick;
  assign in_ready = in_pkt || found;
  assign fire     = in_valid && in_ready;

  always_comb begin
    wr_en = '0;
    if (fire) wr_en[unit] = 1'b1;
  end
  assign wr_first    = !in_pkt;
  assign wr_last     = in_last;
  assign wr_beat     = beat[BW-1:0];
  assign wr_nbytes   = (beat < (BW+1)'(BEATS)) ? in_nbytes : '0;
  assign wr_data     = in_data;
  assign wr_pkt      = pkt_id;
  assign ev_all_busy = in_valid && !in_pkt && !found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0;
      cur    <= '0;
      rr     <= '0;
      beat   <= '0;
      pkt_id <= '0;
    end else if (fire) begin
      if (!in_pkt) begin
        cur <= pick;
        rr  <= UW'((int'(pick) + 1) % N_UNITS);
      end
      if (in_last) begin
        in_pkt <= 1'b0;
        beat   <= '0;
        pkt_id <= pkt_id + 1'b1;
      end else begin
        in_pkt <= 1'b1;
        if (beat != (BW+1)'(BEATS)) beat <= beat + 1'b1;
      end
    end
  end

  first_to_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                  fire && !in_pkt |-> unit_idle[pick]);
endmodule
