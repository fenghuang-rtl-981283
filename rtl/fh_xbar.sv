// fh_xbar: the TAB memory crossbar.
//
// Request side: every xPU port offers at most one request per cycle; the
// stripe map (fh_stripe_map) names the shard that holds its address, and each
// shard has a round-robin arbiter that picks one of the ports addressing it.
// Requests to different shards pass in the same cycle, so with NUM_XPU ports
// streaming over striped addresses every shard can take one request per
// cycle. Response side: each shard offers one response tagged with the
// issuing port; each port has a round-robin arbiter over the shards.
//
// Interface: valid/ready on every channel; a transfer happens when both are
// high at a clock edge. Both directions are combinational (zero added
// latency); registering is left to the shard controllers' input FIFOs.
// The crossbar topology follows the source text; the round-robin arbitration
// is this design's choice.
module fh_xbar
  import fh_pkg::*;
#(
  parameter int unsigned NUM_XPU = fh_pkg::DEF_NUM_XPU,
  parameter int unsigned NUM_MEM = fh_pkg::DEF_NUM_MEM,
  localparam int unsigned MW     = $clog2(NUM_MEM > 1 ? NUM_MEM : 2)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // xPU side, requests in
  input  logic [NUM_XPU-1:0]   in_valid,
  output logic [NUM_XPU-1:0]   in_ready,
  input  fh_req_t              in_req   [NUM_XPU],
  // shard side, requests out
  output logic [NUM_MEM-1:0]   s_valid,
  input  logic [NUM_MEM-1:0]   s_ready,
  output fh_sreq_t             s_req    [NUM_MEM],
  // shard side, responses in
  input  logic [NUM_MEM-1:0]   sr_valid,
  output logic [NUM_MEM-1:0]   sr_ready,
  input  fh_srsp_t             sr_rsp   [NUM_MEM],
  // xPU side, responses out
  output logic [NUM_XPU-1:0]   out_valid,
  input  logic [NUM_XPU-1:0]   out_ready,
  output fh_rsp_t              out_rsp  [NUM_XPU]
);
  localparam int unsigned XW = $clog2(NUM_XPU > 1 ? NUM_XPU : 2);

  logic [MW-1:0]      dst   [NUM_XPU];
  logic [LADDR_W-1:0] laddr [NUM_XPU];

  for (genvar p = 0; p < NUM_XPU; p++) begin : g_map
    fh_stripe_map #(.NUM_MEM(NUM_MEM)) u_map (
      .addr(in_req[p].addr), .shard(dst[p]), .laddr(laddr[p]));
  end

  // ---------------- request arbitration, one arbiter per shard ----------
  logic [NUM_XPU-1:0] rq_req [NUM_MEM];
  logic [NUM_XPU-1:0] rq_gnt [NUM_MEM];
  logic [XW-1:0]      rq_idx [NUM_MEM];

  for (genvar m = 0; m < NUM_MEM; m++) begin : g_req
    always_comb begin
      for (int p = 0; p < NUM_XPU; p++)
        rq_req[m][p] = in_valid[p] && (dst[p] == MW'(m));
    end

    fh_rr_arb #(.N(NUM_XPU)) u_arb (
      .clk, .rst_n, .req(rq_req[m]), .advance(s_ready[m]),
      .grant(rq_gnt[m]), .gnt_idx(rq_idx[m]));

    always_comb begin
      s_valid[m]        = |rq_req[m];
      s_req[m].op       = in_req[rq_idx[m]].op;
      s_req[m].laddr    = laddr[rq_idx[m]];
      s_req[m].data     = in_req[rq_idx[m]].data;
      s_req[m].id       = in_req[rq_idx[m]].id;
      s_req[m].notify   = in_req[rq_idx[m]].notify;
      s_req[m].grp      = in_req[rq_idx[m]].grp;
      s_req[m].port     = PORT_W'(rq_idx[m]);
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_XPU; p++)
      in_ready[p] = s_ready[dst[p]] && rq_gnt[dst[p]][p];
  end

  // ---------------- response arbitration, one arbiter per port ----------
  logic [NUM_MEM-1:0] rs_req [NUM_XPU];
  logic [NUM_MEM-1:0] rs_gnt [NUM_XPU];
  logic [MW-1:0]      rs_idx [NUM_XPU];

  for (genvar p = 0; p < NUM_XPU; p++) begin : g_rsp
    always_comb begin
      for (int m = 0; m < NUM_MEM; m++)
        rs_req[p][m] = sr_valid[m] && (sr_rsp[m].port == PORT_W'(p));
    end

    fh_rr_arb #(.N(NUM_MEM)) u_arb (
      .clk, .rst_n, .req(rs_req[p]), .advance(out_ready[p]),
      .grant(rs_gnt[p]), .gnt_idx(rs_idx[p]));

    assign out_valid[p] = |rs_req[p];
    assign out_rsp[p]   = sr_rsp[rs_idx[p]].rsp;
  end

  always_comb begin
    for (int m = 0; m < NUM_MEM; m++)
      sr_ready[m] = out_ready[XW'(sr_rsp[m].port)] && rs_gnt[XW'(sr_rsp[m].port)][m];
  end
endmodule
