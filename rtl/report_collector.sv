// report_collector: merges the fragment-match reports of all matching units
// into the single report stream that goes to the host.
//
// Each clock the collector looks at the units' report queues round robin,
// starting after the unit it served last, takes the first non-empty one
// into its output register and acknowledges it. The output register is
// refilled in the clock it is read, so one report per clock can leave.
// The paper draws one stream of fragment matches from all units to the
// verification software; how it is merged is this design's choice.
//
// Timing: a report appears on out_* one clock after it is taken.
module report_collector
  import xav_pkg::*;
#(
  parameter int unsigned N_UNITS = 64,
  localparam int unsigned UW     = $clog2(N_UNITS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_UNITS-1:0] in_valid,
  output logic [N_UNITS-1:0] in_ready,
  input  report_t            in_rep [N_UNITS],
  output logic               out_valid,
  input  logic               out_ready,
  output report_t            out_rep
);
  logic [UW-1:0] rr;
  logic          found;
  logic [UW-1:0] pick;

  always_comb begin
    logic [UW-1:0] idx;
    found = 1'b0;
    pick  = rr;
    for (int i = 0; i < N_UNITS; i++) begin
      idx = UW'((int'(rr) + i) % N_UNITS);
      if (!found && in_valid[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
  end

  logic take;
  assign take = found && (!out_valid || out_ready);

  always_comb begin
    in_ready = '0;
    if (take) in_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_rep   <= '0;
      rr        <= '0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_rep   <= in_rep[pick];
        rr        <= UW'((int'(pick) + 1) % N_UNITS);
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             out_valid && !out_ready |=> out_valid && $stable(out_rep));
endmodule
