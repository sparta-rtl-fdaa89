// noc_xbar: the network between requesters (accelerators and the host's
// physical-address port) and the memory partitions, standing in for the NoC
// and off-chip links the paper's requests cross. Each request carries its
// destination partition; each response carries the requester id (src) it
// must return to. Every output has its own round-robin arbiter, so any set
// of requesters aimed at different partitions proceeds in the same cycle and
// requesters aimed at the same one are served in turn (the losers stall).
// The paper gives no topology or latency; a single-cycle crossbar is this
// design's choice, and a pipelined mesh could replace it behind the same
// valid/ready ports.
// Interface: src side req_valid/req_ready/req/req_dst per requester and
// rsp_valid/rsp_ready/rsp per requester; dst side the mirror image per
// partition. All paths are combinational; a transfer happens on a clock edge
// where valid and ready are both high. Requests and responses hold their
// payload until accepted.
module noc_xbar
  import sparta_pkg::*;
#(
  parameter int unsigned N_SRC = 9,
  parameter int unsigned N_DST = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // requester side
  input  logic [N_SRC-1:0]     req_valid,
  output logic [N_SRC-1:0]     req_ready,
  input  mreq_t                req      [N_SRC],
  input  logic [PART_BITS-1:0] req_dst  [N_SRC],
  output logic [N_SRC-1:0]     rsp_valid,
  input  logic [N_SRC-1:0]     rsp_ready,
  output mresp_t               rsp      [N_SRC],
  // partition side
  output logic [N_DST-1:0]     out_valid,
  input  logic [N_DST-1:0]     out_ready,
  output mreq_t                out_req  [N_DST],
  input  logic [N_DST-1:0]     in_valid,
  output logic [N_DST-1:0]     in_ready,
  input  mresp_t               in_rsp   [N_DST],
  output logic [N_DST-1:0]     stat_conflict   // a request waited on another for this output
);
  localparam int unsigned SW = (N_SRC > 1) ? $clog2(N_SRC) : 1;
  localparam int unsigned DW = (N_DST > 1) ? $clog2(N_DST) : 1;

  // request path
  logic [N_SRC-1:0] want [N_DST];
  logic [N_DST-1:0] g_val;
  logic [SW-1:0]    g_idx [N_DST];

  always_comb
    for (int d = 0; d < N_DST; d++)
      for (int s = 0; s < N_SRC; s++)
        want[d][s] = req_valid[s] && (int'(req_dst[s]) == d);

  for (genvar d = 0; d < N_DST; d++) begin : g_out
    rr_arbiter #(.N(N_SRC)) u_arb (
      .clk, .rst_n, .req(want[d]), .advance(out_ready[d]),
      .gnt_valid(g_val[d]), .gnt_idx(g_idx[d])
    );
    assign out_valid[d]     = g_val[d];
    assign out_req[d]       = req[g_idx[d]];
    assign stat_conflict[d] = $countones(want[d]) > 1;
  end

  always_comb begin
    req_ready = '0;
    for (int d = 0; d < N_DST; d++)
      if (g_val[d] && out_ready[d]) req_ready[g_idx[d]] = 1'b1;
  end

  // response path
  logic [N_DST-1:0] rwant [N_SRC];
  logic [N_SRC-1:0] r_val;
  logic [DW-1:0]    r_idx [N_SRC];

  always_comb
    for (int s = 0; s < N_SRC; s++)
      for (int d = 0; d < N_DST; d++)
        rwant[s][d] = in_valid[d] && (int'(in_rsp[d].src) == s);

  for (genvar s = 0; s < N_SRC; s++) begin : g_rsp
    rr_arbiter #(.N(N_DST)) u_arb (
      .clk, .rst_n, .req(rwant[s]), .advance(rsp_ready[s]),
      .gnt_valid(r_val[s]), .gnt_idx(r_idx[s])
    );
    assign rsp_valid[s] = r_val[s];
    assign rsp[s]       = in_rsp[r_idx[s]];
  end

  always_comb begin
    in_ready = '0;
    for (int s = 0; s < N_SRC; s++)
      if (r_val[s] && rsp_ready[s]) in_ready[r_idx[s]] = 1'b1;
  end
endmodule
