// query_scheduler: shares M_COPIES state transition tables among N_REQ
// matching threads.
//
// Every reverse and every forward DFA is a requester. A requester raises
// req with its (state, byte) query and holds it until gnt. Each clock the
// scheduler scans the requesters round robin, starting after the last one
// it granted, and grants up to M_COPIES of them, the k-th grant going to
// STT copy k. A copy returns its result two clocks later together with the
// requester's number, and the scheduler hands it to that requester alone
// (rsp_valid[i], rsp[i]). A requester has at most one query outstanding,
// so results never collide.
// The query scheduler and its job (finish each query on an idle copy and
// return the result) follow the paper; round robin and the hold-until-grant
// handshake are this design's choices.
module query_scheduler
  import xav_pkg::*;
#(
  parameter int unsigned N_REQ    = 128,
  parameter int unsigned M_COPIES = 6,
  localparam int unsigned TAG_W   = $clog2(N_REQ)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // requesters
  input  logic [N_REQ-1:0]       req,
  input  stt_query_t             query   [N_REQ],
  output logic [N_REQ-1:0]       gnt,
  output logic [N_REQ-1:0]       rsp_valid,
  output stt_resp_t              rsp     [N_REQ],
  // STT copies
  output logic [M_COPIES-1:0]    cp_valid,
  output stt_query_t             cp_query [M_COPIES],
  output logic [TAG_W-1:0]       cp_tag   [M_COPIES],
  input  logic [M_COPIES-1:0]    cp_r_valid,
  input  stt_resp_t              cp_r     [M_COPIES],
  input  logic [TAG_W-1:0]       cp_r_tag [M_COPIES]
);
  logic [TAG_W-1:0] ptr;        // first requester looked at this clock
  logic [TAG_W-1:0] last_idx;   // last requester granted this clock
  logic             any_gnt;

  always_comb begin
    int unsigned n;
    logic [TAG_W-1:0] idx;
    n        = 0;
    gnt      = '0;
    any_gnt  = 1'b0;
    last_idx = ptr;
    cp_valid = '0;
    for (int k = 0; k < M_COPIES; k++) begin
      cp_query[k] = '0;
      cp_tag[k]   = '0;
    end
    for (int i = 0; i < N_REQ; i++) begin
      idx = TAG_W'((int'(ptr) + i) % N_REQ);
      if (req[idx] && n < M_COPIES) begin
        gnt[idx]     = 1'b1;
        cp_valid[n]  = 1'b1;
        cp_query[n]  = query[idx];
        cp_tag[n]    = idx;
        last_idx     = idx;
        any_gnt      = 1'b1;
        n            = n + 1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ptr <= '0;
    else if (any_gnt) ptr <= TAG_W'((int'(last_idx) + 1) % N_REQ);
  end

  // route results back to their requesters
  always_comb begin
    rsp_valid = '0;
    for (int i = 0; i < N_REQ; i++) rsp[i] = '0;
    for (int k = 0; k < M_COPIES; k++) begin
      if (cp_r_valid[k]) begin
        rsp_valid[cp_r_tag[k]] = 1'b1;
        rsp[cp_r_tag[k]]       = cp_r[k];
      end
    end
  end

  // a requester never has two results in the same clock
  always_comb begin
    if (rst_n) begin
      for (int k = 0; k < M_COPIES; k++)
        for (int j = k + 1; j < M_COPIES; j++)
          assert (!(cp_r_valid[k] && cp_r_valid[j] && cp_r_tag[k] == cp_r_tag[j]));
    end
  end
endmodule
