// fh_shard_ctrl: per-module memory engine of the TAB, with the near-memory
// reduction (write-accumulate) unit.
//
// One instance sits in front of every remote memory module. It executes the
// three memory operations of the TAB on that module:
//   read             - read the line, return it to the issuing port;
//   write            - write the line, acknowledge it;
//   write-accumulate - read the line, add the carried line to it lane by lane
//                      (LANES x LANE_W-bit two's complement), write the sum
//                      back, acknowledge it.
// Write-accumulate is a read-modify-write done next to memory, so xPUs send
// their partial tensors once and the reduction happens in the TAB.
//
// How it works. Requests wait in a two-entry input FIFO. The head is entered
// into an in-order table of PEND operations in flight; reads and
// write-accumulates issue their memory read at that moment, so one operation
// per cycle can start while earlier ones wait for memory. Memory returns read
// data in order; a FIFO of table indices tells which entry each return
// belongs to, and for a write-accumulate the sum is formed right there.
// Entries retire in order from the oldest: the memory write (for write and
// write-accumulate) and the response leave together. An operation whose line
// equals that of a write or write-accumulate still in the table waits, so
// accumulations into the same line never lose an update, and a read never
// sees a line older than a preceding write. Operations on different lines
// stream at one per cycle as long as PEND covers the memory round trip.
//
// Interface: valid/ready channels. The memory port has a read-command
// channel, an in-order read-data return that is always accepted, and a write
// channel. mem_wr_valid and rsp_valid each also wait for the other channel's
// ready, because a write retires only when both can be taken. commit_valid
// pulses (with commit_grp) when a write or write-accumulate marked "notify"
// retires, for the completion notifier.
//
// From the source text: the operations, reduction next to memory, full rate.
// This design's choices: the table, the hazard rule, the integer lanes and
// PEND = 256, which covers the 130 ns TAB-to-memory round trip of the paper's
// latency breakdown (40 + 50 + 40 ns) at an assumed 1 GHz clock.
module fh_shard_ctrl
  import fh_pkg::*;
#(
  parameter int unsigned PEND = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  // request in (from crossbar)
  input  logic               req_valid,
  output logic               req_ready,
  input  fh_sreq_t           req,
  // response out (to crossbar)
  output logic               rsp_valid,
  input  logic               rsp_ready,
  output fh_srsp_t           rsp,
  // remote memory: read command
  output logic               mem_rd_valid,
  input  logic               mem_rd_ready,
  output logic [LADDR_W-1:0] mem_rd_addr,
  // remote memory: read data (in order)
  input  logic               mem_rvalid,
  input  logic [DATA_W-1:0]  mem_rdata,
  // remote memory: write
  output logic               mem_wr_valid,
  input  logic               mem_wr_ready,
  output logic [LADDR_W-1:0] mem_wr_addr,
  output logic [DATA_W-1:0]  mem_wr_data,
  // completion event
  output logic               commit_valid,
  output logic [GRP_W-1:0]   commit_grp,
  // status
  output logic               hazard_stall
);
  localparam int unsigned PW = $clog2(PEND);

  // ---------------- input FIFO -------------------------------------------
  logic     h_valid, h_pop;
  fh_sreq_t h;
  logic [1:0] in_cnt;

  fh_fifo #(.T(fh_sreq_t), .DEPTH(2)) u_in (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(h_valid), .out_ready(h_pop), .out_data(h), .count(in_cnt));

  // ---------------- operation table --------------------------------------
  logic [PEND-1:0]    e_valid, e_ret, e_wr;   // wr: writes memory at retire
  fh_op_e             e_op     [PEND];
  logic [LADDR_W-1:0] e_addr   [PEND];
  logic [DATA_W-1:0]  e_data   [PEND];
  logic [ID_W-1:0]    e_id     [PEND];
  logic [PORT_W-1:0]  e_port   [PEND];
  logic               e_notify [PEND];
  logic [GRP_W-1:0]   e_grp    [PEND];

  logic [PW-1:0]      wp, cp;
  logic [PW:0]        used;

  // indices of entries waiting for read data, in issue order
  logic               rq_in_ready, rq_out_valid;
  logic [PW-1:0]      rq_idx;
  logic [PW:0]        rq_cnt;

  logic               needs_rd, hazard, alloc, retire;

  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < PEND; i++)
      if (e_valid[i] && e_wr[i] && e_addr[i] == h.laddr) hazard = 1'b1;
  end

  assign needs_rd     = (h.op == OP_READ) || (h.op == OP_WACC);
  assign alloc        = h_valid && !hazard && (used != (PW+1)'(PEND)) &&
                        (!needs_rd || mem_rd_ready);
  assign h_pop        = alloc;
  assign hazard_stall = h_valid && hazard;

  assign mem_rd_valid = h_valid && needs_rd && !hazard && (used != (PW+1)'(PEND));
  assign mem_rd_addr  = h.laddr;

  // ---------------- retire -------------------------------------------------
  logic head_ok;
  assign head_ok      = e_valid[cp] && e_ret[cp];
  assign mem_wr_valid = head_ok && e_wr[cp] && rsp_ready;
  assign mem_wr_addr  = e_addr[cp];
  assign mem_wr_data  = e_data[cp];
  assign rsp_valid    = head_ok && (!e_wr[cp] || mem_wr_ready);
  assign rsp.port     = e_port[cp];
  assign rsp.rsp.kind = e_wr[cp] ? RSP_WACK : RSP_RDATA;
  assign rsp.rsp.data = e_wr[cp] ? '0 : e_data[cp];
  assign rsp.rsp.id   = e_id[cp];
  assign retire       = head_ok && rsp_ready && (!e_wr[cp] || mem_wr_ready);
  assign commit_valid = retire && e_wr[cp] && e_notify[cp];
  assign commit_grp   = e_grp[cp];

  // ---------------- read-return index FIFO --------------------------------
  fh_fifo #(.T(logic [PW-1:0]), .DEPTH(PEND)) u_rq (
    .clk, .rst_n,
    .in_valid(alloc && needs_rd), .in_ready(rq_in_ready), .in_data(wp),
    .out_valid(rq_out_valid), .out_ready(mem_rvalid), .out_data(rq_idx),
    .count(rq_cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= '0;
      e_ret   <= '0;
      e_wr    <= '0;
      wp      <= '0;
      cp      <= '0;
      used    <= '0;
    end else begin
      if (alloc) begin
        e_valid[wp] <= 1'b1;
        e_ret[wp]   <= !needs_rd;
        e_wr[wp]    <= (h.op != OP_READ);
        wp          <= wp + 1'b1;
      end
      if (mem_rvalid) e_ret[rq_idx] <= 1'b1;
      if (retire) begin
        e_valid[cp] <= 1'b0;
        cp          <= cp + 1'b1;
      end
      used <= used + (PW+1)'(alloc) - (PW+1)'(retire);
    end
  end

  always_ff @(posedge clk) begin
    if (alloc) begin
      e_op[wp]     <= h.op;
      e_addr[wp]   <= h.laddr;
      e_id[wp]     <= h.id;
      e_port[wp]   <= h.port;
      e_notify[wp] <= h.notify;
      e_grp[wp]    <= h.grp;
    end
    // the data slot holds the write data / addend, then the read result
    if (alloc)
      e_data[wp] <= h.data;
    if (mem_rvalid)
      e_data[rq_idx] <= (e_op[rq_idx] == OP_WACC) ? lane_add(e_data[rq_idx], mem_rdata)
                                                  : mem_rdata;
  end

  // memory must not return data that was never asked for
  a_no_spurious_return: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rvalid |-> rq_out_valid);
  // the return-index FIFO has one place per table entry, so it never refuses
  a_rq_room: assert property (@(posedge clk) disable iff (!rst_n)
    (alloc && needs_rd) |-> rq_in_ready);
  // reads waiting for data never outnumber the table entries in use
  a_rq_bound: assert property (@(posedge clk) disable iff (!rst_n)
    rq_cnt <= used);
  a_in_bound: assert property (@(posedge clk) disable iff (!rst_n)
    in_cnt <= 2'd2);
endmodule
