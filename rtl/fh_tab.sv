// fh_tab: the Tensor Addressable Bridge (TAB).
//
// The TAB is the chip between the xPUs and the shared remote memory. It has
// one port per xPU (north side) and one port per remote memory module (south
// side), and the two sides scale independently (NUM_XPU, NUM_MEM). Inside:
//  - a crossbar (fh_xbar) that stripes requests over the modules by line
//    address and returns responses to the issuing port;
//  - one engine per module (fh_shard_ctrl) that executes read, write and
//    write-accumulate, the latter as a line-rate read-modify-write next to
//    memory, so reductions of AllReduce / ReduceScatter happen in the TAB;
//  - the completion notifier (fh_notify), which tells a set of xPUs when the
//    writes of a collective or P2P step have all landed.
// Requests with op OP_NCFG go to the notifier; all others to the crossbar.
//
// Interface: per xPU a request channel (valid/ready, fh_req_t), a response
// channel (valid/ready, fh_rsp_t, echoing the request id; read data or write
// acknowledgement) and a notification output (valid + group, no ready). Per
// module a read-command channel, an in-order read-data return and a write
// channel. Timing: a request accepted in cycle t reaches its memory port in
// cycle t+1 at the earliest (one register in the engine's input FIFO), well
// inside the 10 ns of TAB processing in the source text's latency breakdown
// at the assumed 1 GHz clock. The SerDes links of the real chip are not part
// of this RTL: the ports are plain parallel channels.
module fh_tab
  import fh_pkg::*;
#(
  parameter int unsigned NUM_XPU = fh_pkg::DEF_NUM_XPU,
  parameter int unsigned NUM_MEM = fh_pkg::DEF_NUM_MEM,
  parameter int unsigned PEND    = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  // xPU ports
  input  logic [NUM_XPU-1:0]  req_valid,
  output logic [NUM_XPU-1:0]  req_ready,
  input  fh_req_t             req       [NUM_XPU],
  output logic [NUM_XPU-1:0]  rsp_valid,
  input  logic [NUM_XPU-1:0]  rsp_ready,
  output fh_rsp_t             rsp       [NUM_XPU],
  output logic [NUM_XPU-1:0]  ntf_valid,
  output logic [GRP_W-1:0]    ntf_grp   [NUM_XPU],
  // remote memory ports
  output logic [NUM_MEM-1:0]  mem_rd_valid,
  input  logic [NUM_MEM-1:0]  mem_rd_ready,
  output logic [LADDR_W-1:0]  mem_rd_addr [NUM_MEM],
  input  logic [NUM_MEM-1:0]  mem_rvalid,
  input  logic [DATA_W-1:0]   mem_rdata   [NUM_MEM],
  output logic [NUM_MEM-1:0]  mem_wr_valid,
  input  logic [NUM_MEM-1:0]  mem_wr_ready,
  output logic [LADDR_W-1:0]  mem_wr_addr [NUM_MEM],
  output logic [DATA_W-1:0]   mem_wr_data [NUM_MEM],
  // status: a module engine holds a request behind a same-line write
  output logic [NUM_MEM-1:0]  hazard_stall
);
  // ---------------- split arming requests from memory requests ------------
  logic [NUM_XPU-1:0] is_cfg, x_valid, x_ready, c_valid, c_ready;
  logic [GRP_W-1:0]   c_grp   [NUM_XPU];
  logic [CNT_W-1:0]   c_count [NUM_XPU];
  logic [MAX_XPU-1:0] c_mask  [NUM_XPU];

  always_comb begin
    for (int p = 0; p < NUM_XPU; p++) begin
      is_cfg[p]    = (req[p].op == OP_NCFG);
      x_valid[p]   = req_valid[p] && !is_cfg[p];
      c_valid[p]   = req_valid[p] &&  is_cfg[p];
      req_ready[p] = is_cfg[p] ? c_ready[p] : x_ready[p];
      c_grp[p]     = req[p].grp;
      c_count[p]   = req[p].data[CNT_W-1:0];
      c_mask[p]    = req[p].data[CNT_W +: MAX_XPU];
    end
  end

  // ---------------- crossbar ---------------------------------------------
  logic [NUM_MEM-1:0] s_valid, s_ready, sr_valid, sr_ready;
  fh_sreq_t           s_req  [NUM_MEM];
  fh_srsp_t           sr_rsp [NUM_MEM];

  fh_xbar #(.NUM_XPU(NUM_XPU), .NUM_MEM(NUM_MEM)) u_xbar (
    .clk, .rst_n,
    .in_valid(x_valid), .in_ready(x_ready), .in_req(req),
    .s_valid, .s_ready, .s_req,
    .sr_valid, .sr_ready, .sr_rsp,
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_rsp(rsp));

  // ---------------- per-module engines ------------------------------------
  logic [NUM_MEM-1:0] commit_valid;
  logic [GRP_W-1:0]   commit_grp [NUM_MEM];

  for (genvar m = 0; m < NUM_MEM; m++) begin : g_shard
    fh_shard_ctrl #(.PEND(PEND)) u_shard (
      .clk, .rst_n,
      .req_valid(s_valid[m]), .req_ready(s_ready[m]), .req(s_req[m]),
      .rsp_valid(sr_valid[m]), .rsp_ready(sr_ready[m]), .rsp(sr_rsp[m]),
      .mem_rd_valid(mem_rd_valid[m]), .mem_rd_ready(mem_rd_ready[m]),
      .mem_rd_addr(mem_rd_addr[m]),
      .mem_rvalid(mem_rvalid[m]), .mem_rdata(mem_rdata[m]),
      .mem_wr_valid(mem_wr_valid[m]), .mem_wr_ready(mem_wr_ready[m]),
      .mem_wr_addr(mem_wr_addr[m]), .mem_wr_data(mem_wr_data[m]),
      .commit_valid(commit_valid[m]), .commit_grp(commit_grp[m]),
      .hazard_stall(hazard_stall[m]));
  end

  // ---------------- completion notifier ----------------------------------
  fh_notify #(.NUM_XPU(NUM_XPU), .NUM_MEM(NUM_MEM)) u_notify (
    .clk, .rst_n,
    .cfg_valid(c_valid), .cfg_ready(c_ready),
    .cfg_grp(c_grp), .cfg_count(c_count), .cfg_mask(c_mask),
    .commit_valid, .commit_grp,
    .ntf_valid, .ntf_grp);
endmodule
