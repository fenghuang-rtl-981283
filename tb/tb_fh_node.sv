// tb_fh_node: end-to-end test of a FengHuang node at its default size
// (four xPUs, one TAB, four remote memory modules, 256-entry engines).
//
// Remote and local memories are behavioural models; the compute cores are
// played by the testbench. One tensor-parallel layer step is run:
//  A. paging: every xPU's prefetcher pages its 32-line weight shard in from
//     remote memory for kernel 1 while kernel 0 runs; a second page-in for
//     kernel 2 must wait (window of one) until kernel 1 starts;
//  B. the "cores" form a partial result per xPU from the paged-in weights;
//  C. AllReduce: every core write-accumulates its 16 partial lines onto the
//     same remote lines, while the prefetchers keep paging (both share the
//     link); on the notification each xPU reads back its quarter
//     (ReduceScatter) and xPU 0 all of it;
//  D. AllGather of the quarters, an AllToAll exchange, then a P2P transfer
//     from xPU 3 to xPU 0;
//  E. page-out: xPU 1 evicts 24 lines to remote memory.
// All data are compared with values the testbench forms itself. Every
// mechanism - page-in, page-out, window stall, same-line reduction stall,
// completion notification, link contention - is counted and must occur.
// The sequence of collectives (write-accumulate then notification, writes
// then notification, P2P notification to the receiver only) and the
// lookahead-1 paging follow the source description; the sizes, layouts and
// the data values are this test's own choices. Memory latency: 20 cycles.
module tb_fh_node;
  import fh_pkg::*;

  localparam int unsigned NX = 4, NM = 4, LAT = 20, WL = 32;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NX-1:0] core_req_valid, core_req_ready, core_rsp_valid, core_rsp_ready;
  fh_req_t       core_req [NX];
  fh_rsp_t       core_rsp [NX];
  logic [NX-1:0] ntf_valid;
  logic [GRP_W-1:0] ntf_grp [NX];
  logic [NX-1:0] desc_valid, desc_ready, done_valid, window_stall, pf_busy;
  fh_desc_t      desc [NX];
  logic [15:0]   exec_kernel [NX];
  logic [15:0]   done_kernel [NX];
  fh_dir_e       done_dir [NX];
  logic [NX-1:0] lm_valid, lm_ready, lm_we, lm_rvalid;
  logic [LOC_AW-1:0] lm_addr [NX];
  logic [DATA_W-1:0] lm_wdata [NX], lm_rdata [NX];
  logic [NM-1:0] mem_rd_valid, mem_rd_ready, mem_rvalid, mem_wr_valid, mem_wr_ready;
  logic [LADDR_W-1:0] mem_rd_addr [NM], mem_wr_addr [NM];
  logic [DATA_W-1:0]  mem_rdata [NM], mem_wr_data [NM];
  logic [NM-1:0] hazard_stall;
  logic [NX-1:0] link_busy;

  fh_node dut (.*);

  for (genvar m = 0; m < NM; m++) begin : g_mem
    fh_remote_mem_model #(.LAT(LAT)) u_mem (
      .clk, .rst_n,
      .rd_valid(mem_rd_valid[m]), .rd_ready(mem_rd_ready[m]), .rd_addr(mem_rd_addr[m]),
      .rvalid(mem_rvalid[m]), .rdata(mem_rdata[m]),
      .wr_valid(mem_wr_valid[m]), .wr_ready(mem_wr_ready[m]), .wr_addr(mem_wr_addr[m]),
      .wr_data(mem_wr_data[m]));
  end

  for (genvar x = 0; x < NX; x++) begin : g_lm
    fh_local_mem_model #(.LINES(1024), .LAT(2), .STALL_PCT(10)) u_lm (
      .clk, .rst_n, .valid(lm_valid[x]), .ready(lm_ready[x]), .we(lm_we[x]),
      .addr(lm_addr[x]), .wdata(lm_wdata[x]), .rvalid(lm_rvalid[x]), .rdata(lm_rdata[x]));
  end

  // ---- remote memory access by line number (striped over the modules) ----
  function automatic logic [DATA_W-1:0] rpeek(input longint unsigned line);
    case (line % NM)
      0: return g_mem[0].u_mem.peek(LADDR_W'(line / NM));
      1: return g_mem[1].u_mem.peek(LADDR_W'(line / NM));
      2: return g_mem[2].u_mem.peek(LADDR_W'(line / NM));
      default: return g_mem[3].u_mem.peek(LADDR_W'(line / NM));
    endcase
  endfunction

  task automatic rpoke(input longint unsigned line, input logic [DATA_W-1:0] d);
    case (line % NM)
      0: g_mem[0].u_mem.poke(LADDR_W'(line / NM), d);
      1: g_mem[1].u_mem.poke(LADDR_W'(line / NM), d);
      2: g_mem[2].u_mem.poke(LADDR_W'(line / NM), d);
      default: g_mem[3].u_mem.poke(LADDR_W'(line / NM), d);
    endcase
  endtask

  function automatic logic [DATA_W-1:0] lpeek(input int x, input int a);
    case (x)
      0: return g_lm[0].u_lm.peek(a);
      1: return g_lm[1].u_lm.peek(a);
      2: return g_lm[2].u_lm.peek(a);
      default: return g_lm[3].u_lm.peek(a);
    endcase
  endfunction

  task automatic lpoke(input int x, input int a, input logic [DATA_W-1:0] d);
    case (x)
      0: g_lm[0].u_lm.poke(a, d);
      1: g_lm[1].u_lm.poke(a, d);
      2: g_lm[2].u_lm.poke(a, d);
      default: g_lm[3].u_lm.poke(a, d);
    endcase
  endtask

  // weight line i of xPU x's shard, and lane-wise helpers
  function automatic logic [DATA_W-1:0] weight(input int x, input int i);
    logic [DATA_W-1:0] d;
    for (int l = 0; l < LANES; l++) d[l*LANE_W +: LANE_W] = LANE_W'(x * 7919 + i * 131 + l * 17 + 3);
    return d;
  endfunction

  function automatic logic [DATA_W-1:0] ladd(input logic [DATA_W-1:0] a, input logic [DATA_W-1:0] b);
    logic [DATA_W-1:0] s;
    for (int l = 0; l < LANES; l++) begin
      int unsigned u, v;
      u = a[l*LANE_W +: LANE_W];
      v = b[l*LANE_W +: LANE_W];
      s[l*LANE_W +: LANE_W] = LANE_W'(u + v);
    end
    return s;
  endfunction

  // ---- counters ----------------------------------------------------------
  logic [DATA_W-1:0] rdata [NX][logic [ID_W-1:0]];
  bit   got  [NX][logic [ID_W-1:0]];
  int   acks [NX];
  int   ntfs [NX][NUM_GRP];
  int   n_pagein = 0, n_pageout = 0, n_window = 0, n_hazard = 0, n_link = 0, n_ntf = 0;

  always @(negedge clk) if (rst_n) begin
    for (int x = 0; x < NX; x++) begin
      if (core_rsp_valid[x] && core_rsp_ready[x]) begin
        if (core_rsp[x].kind == RSP_WACK) acks[x]++;
        else begin
          rdata[x][core_rsp[x].id] = core_rsp[x].data;
          got[x][core_rsp[x].id] = 1;
        end
      end
      if (ntf_valid[x]) begin
        ntfs[x][ntf_grp[x]]++;
        n_ntf++;
      end
      if (done_valid[x]) begin
        if (done_dir[x] == PAGE_IN) n_pagein++; else n_pageout++;
      end
      if (window_stall[x]) n_window++;
      if (link_busy[x]) n_link++;
    end
    if (|hazard_stall) n_hazard++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---- core-side transactions ----------------------------------------------
  task automatic send(input int x, input fh_op_e op, input longint unsigned line,
                      input logic [DATA_W-1:0] d, input logic ntf, input int g,
                      input logic [ID_W-1:0] id);
    @(negedge clk);
    core_req[x].op = op;
    core_req[x].addr = ADDR_W'(line * LINE_BYTES);
    core_req[x].data = d;
    core_req[x].id = id;
    core_req[x].notify = ntf;
    core_req[x].grp = GRP_W'(g);
    core_req_valid[x] = 1;
    #1;
    while (!core_req_ready[x]) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 core_req_valid[x] = 0;
  endtask

  task automatic arm(input int x, input int g, input int n, input logic [3:0] mask);
    logic [DATA_W-1:0] d;
    d = '0;
    d[CNT_W-1:0] = CNT_W'(n);
    d[CNT_W +: MAX_XPU] = MAX_XPU'(mask);
    send(x, OP_NCFG, 0, d, 0, g, 0);
  endtask

  task automatic read_line(input int x, input longint unsigned line, input logic [ID_W-1:0] id,
                           output logic [DATA_W-1:0] d);
    int t = 0;
    got[x][id] = 0;
    send(x, OP_READ, line, '0, 0, 0, id);
    while (!got[x][id] && t < 4000) begin
      @(negedge clk);
      t++;
    end
    d = got[x][id] ? rdata[x][id] : '1;
  endtask

  task automatic wait_ntf(input int x, input int g, input int n);
    int t = 0;
    while (ntfs[x][g] < n && t < 20000) begin
      @(negedge clk);
      t++;
    end
  endtask

  task automatic push_desc(input int x, input fh_dir_e dir, input longint unsigned rline,
                           input int la, input int n, input int k);
    @(negedge clk);
    desc_valid[x]  = 1;
    desc[x].dir    = dir;
    desc[x].raddr  = ADDR_W'(rline * LINE_BYTES);
    desc[x].laddr  = LOC_AW'(la);
    desc[x].lines  = 24'(n);
    desc[x].kernel = 16'(k);
    #1;
    while (!desc_ready[x]) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 desc_valid[x] = 0;
  endtask

  task automatic wait_idle(input int x);
    int t = 0;
    while (pf_busy[x] && t < 50000) begin
      @(negedge clk);
      t++;
    end
    chk(!pf_busy[x], $sformatf("prefetcher %0d finished", x));
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // remote layout (line numbers): weights of xPU x at 4096*x, next-layer
  // weights at 4096*x + 1024, AllReduce at 20000, AllGather at 21000,
  // P2P at 22000, AllToAll at 23000, eviction at 30000
  logic [DATA_W-1:0] partial [NX][16];
  logic [DATA_W-1:0] reduced [16];

  task automatic allreduce_part(input int x);
    for (int i = 0; i < 16; i++) send(x, OP_WACC, 20000 + i, partial[x][i], 1, 1, ID_W'(i));
  endtask

  task automatic allgather_part(input int x);
    for (int i = 0; i < 4; i++) send(x, OP_WRITE, 21000 + 4 * x + i, reduced[4 * x + i], 1, 2, ID_W'(i));
  endtask

  task automatic alltoall_part(input int x);
    for (int j = 0; j < NX; j++) send(x, OP_WRITE, 23000 + NX * j + x, weight(70 + x, j), 1, 4, ID_W'(j));
  endtask

  initial begin
    logic [DATA_W-1:0] d;
    core_req_valid = '0;
    core_rsp_ready = '1;
    desc_valid = '0;
    for (int x = 0; x < NX; x++) begin
      core_req[x] = '0;
      desc[x] = '0;
      exec_kernel[x] = 0;
      acks[x] = 0;
      for (int g = 0; g < NUM_GRP; g++) ntfs[x][g] = 0;
    end
    for (int x = 0; x < NX; x++)
      for (int i = 0; i < WL; i++) begin
        rpoke(4096 * x + i, weight(x, i));
        rpoke(4096 * x + 1024 + i, weight(x + 10, i));
      end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // A. page-in for kernel 1 (allowed) and kernel 2 (must wait)
    for (int x = 0; x < NX; x++) begin
      push_desc(x, PAGE_IN, 4096 * x, 0, WL, 1);
      push_desc(x, PAGE_IN, 4096 * x + 1024, 256, WL, 2);
    end
    repeat (400) @(posedge clk);
    chk(n_pagein == NX, $sformatf("%0d page-ins done before kernel 1 started", n_pagein));
    chk(n_window > 0, "page-in for kernel 2 waited for the window");
    for (int x = 0; x < NX; x++)
      for (int i = 0; i < WL; i++)
        chk(lpeek(x, i) == weight(x, i), $sformatf("xPU %0d weight line %0d paged in", x, i));

    // B. kernel 1 runs: the page-in for kernel 2 may start now
    for (int x = 0; x < NX; x++) exec_kernel[x] = 1;
    for (int x = 0; x < NX; x++)
      for (int i = 0; i < 16; i++)
        partial[x][i] = ladd(lpeek(x, i), lpeek(x, i + 16));
    for (int i = 0; i < 16; i++) begin
      reduced[i] = '0;
      for (int x = 0; x < NX; x++) reduced[i] = ladd(reduced[i], partial[x][i]);
    end

    // C. AllReduce, overlapping the kernel-2 page-ins on the same links
    arm(0, 1, NX * 16, 4'b1111);
    fork
      allreduce_part(0);
      allreduce_part(1);
      allreduce_part(2);
      allreduce_part(3);
    join
    for (int x = 0; x < NX; x++) begin
      wait_ntf(x, 1, 1);
      chk(ntfs[x][1] == 1, $sformatf("AllReduce notification at xPU %0d", x));
    end
    for (int x = 0; x < NX; x++)
      for (int i = 4 * x; i < 4 * x + 4; i++) begin
        read_line(x, 20000 + i, ID_W'(20 + i), d);
        chk(d == reduced[i], $sformatf("ReduceScatter xPU %0d line %0d", x, i));
      end
    for (int i = 0; i < 16; i++) begin
      read_line(0, 20000 + i, ID_W'(40 + i), d);
      chk(d == reduced[i], $sformatf("AllReduce line %0d", i));
    end
    for (int x = 0; x < NX; x++) wait_idle(x);
    for (int x = 0; x < NX; x++)
      for (int i = 0; i < WL; i++)
        chk(lpeek(x, 256 + i) == weight(x + 10, i), $sformatf("xPU %0d kernel-2 line %0d", x, i));

    // D. AllGather of the reduced quarters, then P2P xPU 3 -> xPU 0
    arm(2, 2, 16, 4'b1111);
    fork
      allgather_part(0);
      allgather_part(1);
      allgather_part(2);
      allgather_part(3);
    join
    for (int x = 0; x < NX; x++) begin
      wait_ntf(x, 2, 1);
      chk(ntfs[x][2] == 1, $sformatf("AllGather notification at xPU %0d", x));
      for (int i = 0; i < 16; i++) begin
        read_line(x, 21000 + i, ID_W'(60 + i), d);
        chk(d == reduced[i], $sformatf("AllGather xPU %0d line %0d", x, i));
      end
    end
    // AllToAll: chunk j of xPU x goes to xPU j; xPU j reads its column
    arm(1, 4, NX * NX, 4'b1111);
    fork
      alltoall_part(0);
      alltoall_part(1);
      alltoall_part(2);
      alltoall_part(3);
    join
    for (int j = 0; j < NX; j++) begin
      wait_ntf(j, 4, 1);
      chk(ntfs[j][4] == 1, $sformatf("AllToAll notification at xPU %0d", j));
      for (int x = 0; x < NX; x++) begin
        read_line(j, 23000 + NX * j + x, ID_W'(100 + x), d);
        chk(d == weight(70 + x, j), $sformatf("AllToAll xPU %0d chunk from xPU %0d", j, x));
      end
    end
    arm(3, 3, 2, 4'b0001);
    for (int i = 0; i < 2; i++) send(3, OP_WRITE, 22000 + i, weight(33, i), 1, 3, ID_W'(i));
    wait_ntf(0, 3, 1);
    chk(ntfs[0][3] == 1 && ntfs[1][3] == 0 && ntfs[2][3] == 0 && ntfs[3][3] == 0,
        "P2P notification only at the receiver");
    for (int i = 0; i < 2; i++) begin
      read_line(0, 22000 + i, ID_W'(90 + i), d);
      chk(d == weight(33, i), $sformatf("P2P line %0d", i));
    end

    // E. eviction of 24 lines from xPU 1
    for (int i = 0; i < 24; i++) lpoke(1, 600 + i, weight(55, i));
    push_desc(1, PAGE_OUT, 30000, 600, 24, 2);
    wait_idle(1);
    for (int i = 0; i < 24; i++)
      chk(rpeek(30000 + i) == weight(55, i), $sformatf("page-out line %0d", i));

    // mechanisms (let the last done pulse be counted first)
    repeat (4) @(negedge clk);
    $display("page-in %0d, page-out %0d, window stall %0d, reduction hazard stall %0d, notifications %0d, link contention %0d",
             n_pagein, n_pageout, n_window, n_hazard, n_ntf, n_link);
    chk(n_pagein == 2 * NX, "page-in count");
    chk(n_pageout == 1, "page-out count");
    chk(n_window > 0, "window stall occurred");
    chk(n_hazard > 0, "same-line reduction stall occurred");
    chk(n_ntf == 3 * NX + 1, "notification count");
    chk(n_link > 0, "link contention occurred");
    $display("finished at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
