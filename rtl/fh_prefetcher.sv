// fh_prefetcher: the Tensor Prefetcher of an xPU (the paging stream engine).
//
// The xPU's local memory acts as the paging memory of the TAB's remote
// memory. Software (the paging stream) hands this engine one descriptor per
// tensor move: page-in copies a tensor from remote into local memory ahead of
// the kernel that needs it, page-out evicts a tensor from local memory back
// to remote memory. Each descriptor carries the index of the kernel it
// belongs to. The engine starts a descriptor only when that index is at most
// exec_kernel + WINDOW, where exec_kernel is the kernel the regular stream
// is running: with WINDOW = 1 it fetches for the next kernel while the
// current one computes (lookahead-1) and never further, which bounds the
// local memory a workload needs. Eviction descriptors use the same rule.
//
// How it works. Descriptors queue in a FIFO and run one at a time, in order.
// Page-in issues one TAB read per line, up to OUT_D in flight; a slot table
// indexed by the request id remembers each line's local address, so the
// responses, which may come back out of order from different memory modules,
// are written to the right place. Page-out reads local memory line by line
// (at most PO_D lines in flight or buffered), and issues a TAB write for
// each line that comes back; it counts the write acknowledgements. A
// descriptor is done when every line has been written at its destination;
// done_valid then pulses with its kernel index and direction.
//
// Interface: desc channel (valid/ready); TAB request channel (valid/ready,
// ids have their top bit set so a port multiplexer can route responses back)
// and response channel (ready follows the local memory's ready); local memory
// port with one command per cycle (lm_valid/lm_ready, lm_we) and in-order
// read data (lm_rvalid). Status: window_stall is high while the head
// descriptor waits for the regular stream to advance.
//
// From the source text: the paging stream, page-in ahead of use, eviction,
// overlap with compute, and the prefetch window w = 1. This design's
// choices: the descriptor format, one descriptor at a time, OUT_D, PO_D.
module fh_prefetcher
  import fh_pkg::*;
#(
  parameter int unsigned WINDOW = 1,
  parameter int unsigned OUT_D  = 16,
  parameter int unsigned PO_D   = 4,
  parameter int unsigned DQ_D   = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // descriptors from the paging stream
  input  logic               desc_valid,
  output logic               desc_ready,
  input  fh_desc_t           desc,
  // progress of the regular stream
  input  logic [15:0]        exec_kernel,
  // TAB port
  output logic               tab_req_valid,
  input  logic               tab_req_ready,
  output fh_req_t            tab_req,
  input  logic               tab_rsp_valid,
  output logic               tab_rsp_ready,
  input  fh_rsp_t            tab_rsp,
  // local memory port
  output logic               lm_valid,
  input  logic               lm_ready,
  output logic               lm_we,
  output logic [LOC_AW-1:0]  lm_addr,
  output logic [DATA_W-1:0]  lm_wdata,
  input  logic               lm_rvalid,
  input  logic [DATA_W-1:0]  lm_rdata,
  // completion and status
  output logic               done_valid,
  output logic [15:0]        done_kernel,
  output fh_dir_e            done_dir,
  output logic               window_stall,
  output logic               busy
);
  localparam int unsigned SW  = $clog2(OUT_D);
  localparam int unsigned PCW = $clog2(PO_D + 1);

  // ---------------- descriptor queue ---------------------------------------
  logic      q_valid, q_pop;
  fh_desc_t  q;
  logic [$clog2(DQ_D+1)-1:0] q_cnt;

  fh_fifo #(.T(fh_desc_t), .DEPTH(DQ_D)) u_dq (
    .clk, .rst_n,
    .in_valid(desc_valid), .in_ready(desc_ready), .in_data(desc),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q), .count(q_cnt));

  // ---------------- active descriptor --------------------------------------
  logic      run;
  fh_desc_t cur;
  logic [23:0] iss;    // lines started (TAB read issued / local read issued)
  logic [23:0] cmpl;   // lines finished at their destination

  logic eligible;
  assign eligible     = (17'(q.kernel) <= 17'(exec_kernel) + 17'(WINDOW));
  assign window_stall = q_valid && !eligible && !run;

  assign q_pop = q_valid && eligible && !run;
  assign busy  = run || q_valid;

  // ---------------- page-in slot table ------------------------------------
  logic [OUT_D-1:0]  slot_busy;
  logic [LOC_AW-1:0] slot_la [OUT_D];
  logic [SW-1:0]     free_slot;
  logic              have_slot;

  always_comb begin
    have_slot = 1'b0;
    free_slot = '0;
    for (int i = OUT_D - 1; i >= 0; i--)
      if (!slot_busy[i]) begin
        have_slot = 1'b1;
        free_slot = SW'(i);
      end
  end

  // ---------------- page-out buffer -----------------------------------------
  typedef struct packed {
    logic [23:0]       idx;
    logic [DATA_W-1:0] data;
  } po_t;

  logic        po_in_valid, po_in_ready, po_valid, po_pop;
  po_t         po_in, po_head;
  logic [PCW-1:0] po_cnt, lr_fly;
  logic [23:0] lr_idx;   // index of the next local read data to return

  assign po_in_valid = lm_rvalid;
  assign po_in.idx   = lr_idx;
  assign po_in.data  = lm_rdata;

  fh_fifo #(.T(po_t), .DEPTH(PO_D)) u_po (
    .clk, .rst_n,
    .in_valid(po_in_valid), .in_ready(po_in_ready), .in_data(po_in),
    .out_valid(po_valid), .out_ready(po_pop), .out_data(po_head), .count(po_cnt));

  // ---------------- issue logic --------------------------------------------
  logic is_in, is_out, pi_issue, po_lread, rsp_fire, lm_wr;
  assign is_in  = run && (cur.dir == PAGE_IN);
  assign is_out = run && (cur.dir == PAGE_OUT);

  // page-in: a read per line while slots last
  // page-out: a write per buffered line
  always_comb begin
    tab_req        = '0;
    tab_req_valid  = 1'b0;
    if (is_in && iss != cur.lines && have_slot) begin
      tab_req_valid = 1'b1;
      tab_req.op    = OP_READ;
      tab_req.addr  = cur.raddr + (ADDR_W'(iss) << OFS_W);
      tab_req.id    = {1'b1, (ID_W-1)'(free_slot)};
    end else if (is_out && po_valid) begin
      tab_req_valid = 1'b1;
      tab_req.op    = OP_WRITE;
      tab_req.addr  = cur.raddr + (ADDR_W'(po_head.idx) << OFS_W);
      tab_req.data  = po_head.data;
      tab_req.id    = {1'b1, (ID_W-1)'(0)};
    end
  end
  assign pi_issue = is_in && tab_req_valid && tab_req_ready;
  assign po_pop   = is_out && tab_req_ready;

  // page-in data goes straight to local memory; page-out reads local memory
  assign lm_wr    = is_in && tab_rsp_valid && tab_rsp.kind == RSP_RDATA;
  assign po_lread = is_out && !lm_wr && iss != cur.lines &&
                    (32'(lr_fly) + 32'(po_cnt) < PO_D);

  always_comb begin
    lm_valid = lm_wr || po_lread;
    lm_we    = lm_wr;
    lm_addr  = lm_wr ? slot_la[tab_rsp.id[SW-1:0]] : cur.laddr + LOC_AW'(iss);
    lm_wdata = tab_rsp.data;
  end

  // page-in responses wait for the local memory; acks are always taken
  assign tab_rsp_ready = (tab_rsp.kind == RSP_WACK) || !is_in || lm_ready;
  assign rsp_fire      = tab_rsp_valid && tab_rsp_ready;

  logic finish;
  assign finish = run && (cmpl == cur.lines);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run         <= 1'b0;
      cur         <= '0;
      iss         <= '0;
      cmpl        <= '0;
      slot_busy   <= '0;
      lr_fly      <= '0;
      lr_idx      <= '0;
      done_valid  <= 1'b0;
      done_kernel <= '0;
      done_dir    <= PAGE_IN;
    end else begin
      done_valid <= 1'b0;
      if (q_pop) begin
        run    <= 1'b1;
        cur    <= q;
        iss    <= '0;
        cmpl   <= '0;
        lr_idx <= '0;
      end
      if (pi_issue) begin
        iss                  <= iss + 1'b1;
        slot_busy[free_slot] <= 1'b1;
        slot_la[free_slot]   <= cur.laddr + LOC_AW'(iss);
      end
      if (lm_wr && lm_ready) begin
        slot_busy[tab_rsp.id[SW-1:0]] <= 1'b0;
        cmpl <= cmpl + 1'b1;
      end
      if (po_lread && lm_ready) iss <= iss + 1'b1;
      lr_fly <= lr_fly + PCW'(po_lread && lm_ready) - PCW'(lm_rvalid);
      if (lm_rvalid) lr_idx <= lr_idx + 1'b1;
      if (is_out && rsp_fire && tab_rsp.kind == RSP_WACK) cmpl <= cmpl + 1'b1;
      if (finish) begin
        run         <= 1'b0;
        done_valid  <= 1'b1;
        done_kernel <= cur.kernel;
        done_dir    <= cur.dir;
      end
    end
  end

  // the page-out buffer is sized by the in-flight count, so it never overflows
  a_po_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    po_in_valid |-> po_in_ready);
  // busy is high whenever a descriptor is queued
  a_busy_when_queued: assert property (@(posedge clk) disable iff (!rst_n)
    (q_cnt != '0) |-> busy);
endmodule
