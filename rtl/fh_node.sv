// fh_node: a FengHuang node - NUM_XPU accelerators sharing one TAB.
//
// The node's memory has two tiers. Each xPU keeps a small, fast local memory
// and reaches a large remote memory, striped over NUM_MEM modules, through
// the Tensor Addressable Bridge (fh_tab). The remote memory is shared: the
// xPUs communicate by writing into it (write-accumulate for reductions,
// plain writes for gathers and point-to-point transfers) and learn that a
// step is complete from the TAB's write-completion notifications, instead of
// sending data to each other over device-to-device links.
//
// Per xPU this top holds the xPU-side hardware that the design adds - the
// tensor prefetcher (fh_prefetcher), which pages tensors between the two
// tiers just ahead of use, and the port multiplexer (fh_xpu_mux) that shares
// the xPU's TAB link between the prefetcher and the compute cores. The cores
// themselves, their local memories and the remote memory modules are outside
// this RTL: their channels are ports of this module. Default shape: four
// xPUs on one TAB (the evaluated FH4 configuration) and four remote memory
// modules, one line-rate reduction engine each.
//
// Timing: see fh_tab and fh_prefetcher; the port multiplexer adds no cycle.
module fh_node
  import fh_pkg::*;
#(
  parameter int unsigned NUM_XPU = fh_pkg::DEF_NUM_XPU,
  parameter int unsigned NUM_MEM = fh_pkg::DEF_NUM_MEM,
  parameter int unsigned PEND    = 256,
  parameter int unsigned WINDOW  = 1,
  parameter int unsigned OUT_D   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // compute cores of each xPU: direct remote accesses
  input  logic [NUM_XPU-1:0]  core_req_valid,
  output logic [NUM_XPU-1:0]  core_req_ready,
  input  fh_req_t             core_req      [NUM_XPU],
  output logic [NUM_XPU-1:0]  core_rsp_valid,
  input  logic [NUM_XPU-1:0]  core_rsp_ready,
  output fh_rsp_t             core_rsp      [NUM_XPU],
  output logic [NUM_XPU-1:0]  ntf_valid,
  output logic [GRP_W-1:0]    ntf_grp       [NUM_XPU],
  // paging stream of each xPU
  input  logic [NUM_XPU-1:0]  desc_valid,
  output logic [NUM_XPU-1:0]  desc_ready,
  input  fh_desc_t            desc          [NUM_XPU],
  input  logic [15:0]         exec_kernel   [NUM_XPU],
  output logic [NUM_XPU-1:0]  done_valid,
  output logic [15:0]         done_kernel   [NUM_XPU],
  output fh_dir_e             done_dir      [NUM_XPU],
  output logic [NUM_XPU-1:0]  window_stall,
  output logic [NUM_XPU-1:0]  pf_busy,
  // local memory of each xPU
  output logic [NUM_XPU-1:0]  lm_valid,
  input  logic [NUM_XPU-1:0]  lm_ready,
  output logic [NUM_XPU-1:0]  lm_we,
  output logic [LOC_AW-1:0]   lm_addr       [NUM_XPU],
  output logic [DATA_W-1:0]   lm_wdata      [NUM_XPU],
  input  logic [NUM_XPU-1:0]  lm_rvalid,
  input  logic [DATA_W-1:0]   lm_rdata      [NUM_XPU],
  // remote memory modules
  output logic [NUM_MEM-1:0]  mem_rd_valid,
  input  logic [NUM_MEM-1:0]  mem_rd_ready,
  output logic [LADDR_W-1:0]  mem_rd_addr   [NUM_MEM],
  input  logic [NUM_MEM-1:0]  mem_rvalid,
  input  logic [DATA_W-1:0]   mem_rdata     [NUM_MEM],
  output logic [NUM_MEM-1:0]  mem_wr_valid,
  input  logic [NUM_MEM-1:0]  mem_wr_ready,
  output logic [LADDR_W-1:0]  mem_wr_addr   [NUM_MEM],
  output logic [DATA_W-1:0]   mem_wr_data   [NUM_MEM],
  // status
  output logic [NUM_MEM-1:0]  hazard_stall,
  output logic [NUM_XPU-1:0]  link_busy       // request waiting on a busy link
);
  logic [NUM_XPU-1:0] t_req_valid, t_req_ready, t_rsp_valid, t_rsp_ready;
  fh_req_t            t_req [NUM_XPU];
  fh_rsp_t            t_rsp [NUM_XPU];

  logic [NUM_XPU-1:0] pf_req_valid, pf_req_ready, pf_rsp_valid, pf_rsp_ready;
  fh_req_t            pf_req [NUM_XPU];
  fh_rsp_t            pf_rsp [NUM_XPU];

  for (genvar x = 0; x < NUM_XPU; x++) begin : g_xpu
    fh_prefetcher #(.WINDOW(WINDOW), .OUT_D(OUT_D)) u_pf (
      .clk, .rst_n,
      .desc_valid(desc_valid[x]), .desc_ready(desc_ready[x]), .desc(desc[x]),
      .exec_kernel(exec_kernel[x]),
      .tab_req_valid(pf_req_valid[x]), .tab_req_ready(pf_req_ready[x]), .tab_req(pf_req[x]),
      .tab_rsp_valid(pf_rsp_valid[x]), .tab_rsp_ready(pf_rsp_ready[x]), .tab_rsp(pf_rsp[x]),
      .lm_valid(lm_valid[x]), .lm_ready(lm_ready[x]), .lm_we(lm_we[x]),
      .lm_addr(lm_addr[x]), .lm_wdata(lm_wdata[x]),
      .lm_rvalid(lm_rvalid[x]), .lm_rdata(lm_rdata[x]),
      .done_valid(done_valid[x]), .done_kernel(done_kernel[x]), .done_dir(done_dir[x]),
      .window_stall(window_stall[x]), .busy(pf_busy[x]));

    fh_xpu_mux u_mux (
      .clk, .rst_n,
      .core_req_valid(core_req_valid[x]), .core_req_ready(core_req_ready[x]),
      .core_req(core_req[x]),
      .core_rsp_valid(core_rsp_valid[x]), .core_rsp_ready(core_rsp_ready[x]),
      .core_rsp(core_rsp[x]),
      .pf_req_valid(pf_req_valid[x]), .pf_req_ready(pf_req_ready[x]), .pf_req(pf_req[x]),
      .pf_rsp_valid(pf_rsp_valid[x]), .pf_rsp_ready(pf_rsp_ready[x]), .pf_rsp(pf_rsp[x]),
      .tab_req_valid(t_req_valid[x]), .tab_req_ready(t_req_ready[x]), .tab_req(t_req[x]),
      .tab_rsp_valid(t_rsp_valid[x]), .tab_rsp_ready(t_rsp_ready[x]), .tab_rsp(t_rsp[x]));

    assign link_busy[x] = t_req_valid[x] && !t_req_ready[x];
  end

  fh_tab #(.NUM_XPU(NUM_XPU), .NUM_MEM(NUM_MEM), .PEND(PEND)) u_tab (
    .clk, .rst_n,
    .req_valid(t_req_valid), .req_ready(t_req_ready), .req(t_req),
    .rsp_valid(t_rsp_valid), .rsp_ready(t_rsp_ready), .rsp(t_rsp),
    .ntf_valid, .ntf_grp,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr,
    .mem_rvalid, .mem_rdata,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .hazard_stall);
endmodule
