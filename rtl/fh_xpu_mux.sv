// fh_xpu_mux: merges an xPU's two sources of remote-memory traffic onto its
// single link to the TAB.
//
// The compute cores reach remote memory directly (loads, stores,
// write-accumulates of collectives, arming of completion groups), and the
// tensor prefetcher moves whole tensors. Both share the xPU's TAB port. A
// round-robin arbiter picks one request per cycle. The top bit of the
// request id tells the sources apart: the mux clears it on core requests
// and the prefetcher sets it on its own, so each response is sent back to
// its source by that bit alone. Core ids are therefore ID_W-1 bits wide.
// Combinational (no added latency); all channels valid/ready. The sharing of
// the port follows the source text (cores access remote memory directly and
// a hardware engine copies tensors); the arbitration is this design's choice.
module fh_xpu_mux
  import fh_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // compute cores
  input  logic     core_req_valid,
  output logic     core_req_ready,
  input  fh_req_t  core_req,
  output logic     core_rsp_valid,
  input  logic     core_rsp_ready,
  output fh_rsp_t  core_rsp,
  // tensor prefetcher
  input  logic     pf_req_valid,
  output logic     pf_req_ready,
  input  fh_req_t  pf_req,
  output logic     pf_rsp_valid,
  input  logic     pf_rsp_ready,
  output fh_rsp_t  pf_rsp,
  // TAB link
  output logic     tab_req_valid,
  input  logic     tab_req_ready,
  output fh_req_t  tab_req,
  input  logic     tab_rsp_valid,
  output logic     tab_rsp_ready,
  input  fh_rsp_t  tab_rsp
);
  logic [1:0] gnt;
  logic       idx;

  fh_rr_arb #(.N(2)) u_arb (
    .clk, .rst_n, .req({pf_req_valid, core_req_valid}), .advance(tab_req_ready),
    .grant(gnt), .gnt_idx(idx));

  always_comb begin
    tab_req_valid = core_req_valid || pf_req_valid;
    if (idx) begin
      tab_req = pf_req;
      tab_req.id[ID_W-1] = 1'b1;
    end else begin
      tab_req = core_req;
      tab_req.id[ID_W-1] = 1'b0;
    end
    core_req_ready = gnt[0] && tab_req_ready;
    pf_req_ready   = gnt[1] && tab_req_ready;
  end

  logic to_pf;
  assign to_pf          = tab_rsp.id[ID_W-1];
  assign core_rsp_valid = tab_rsp_valid && !to_pf;
  assign pf_rsp_valid   = tab_rsp_valid &&  to_pf;
  assign core_rsp       = tab_rsp;
  assign pf_rsp         = tab_rsp;
  assign tab_rsp_ready  = to_pf ? pf_rsp_ready : core_rsp_ready;
endmodule
