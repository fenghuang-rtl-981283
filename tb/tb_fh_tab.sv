// tb_fh_tab: self-checking test of the TAB with four xPU ports and four
// remote memory modules (behavioural models, 20-cycle read latency).
//
//  1. Latency of one read on an idle TAB: the TAB's own share (total minus
//     the memory latency) must stay within 10 cycles, the 10 ns of TAB
//     processing in the source text's latency breakdown at an assumed 1 GHz
//     clock. A posted write must likewise be acknowledged within 10
//     cycles, without waiting for memory.
//  2. AllReduce / ReduceScatter: every port write-accumulates its partial
//     tensor (16 lines) onto the same 16 destination lines; port 0 arms a
//     group expecting 64 writes and all four ports must be notified; then
//     port x reads back its quarter (ReduceScatter) and port 0 all of it
//     (AllReduce), compared with sums formed in the testbench.
//  3. AllGather: each port writes its 4-line chunk into one shared region,
//     notification to all, each port reads the whole region.
//  4. P2P: port 1 writes 3 lines, only port 2 is notified, port 2 reads them.
//  5. Line rate: 4 ports x 64 write-accumulates to different lines must
//     finish within 64 + latency + 24 cycles (one per module per cycle).
module tb_fh_tab;
  import fh_pkg::*;

  localparam int unsigned NX = 4, NM = 4, LAT = 20;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NX-1:0] req_valid, req_ready, rsp_valid, rsp_ready, ntf_valid;
  fh_req_t       req [NX];
  fh_rsp_t       rsp [NX];
  logic [GRP_W-1:0] ntf_grp [NX];
  logic [NM-1:0] mem_rd_valid, mem_rd_ready, mem_rvalid, mem_wr_valid, mem_wr_ready;
  logic [LADDR_W-1:0] mem_rd_addr [NM], mem_wr_addr [NM];
  logic [DATA_W-1:0]  mem_rdata [NM], mem_wr_data [NM];
  logic [NM-1:0] hazard_stall;

  fh_tab #(.NUM_XPU(NX), .NUM_MEM(NM)) dut (.*);

  for (genvar m = 0; m < NM; m++) begin : g_mem
    fh_remote_mem_model #(.LAT(LAT)) u_mem (
      .clk, .rst_n,
      .rd_valid(mem_rd_valid[m]), .rd_ready(mem_rd_ready[m]), .rd_addr(mem_rd_addr[m]),
      .rvalid(mem_rvalid[m]), .rdata(mem_rdata[m]),
      .wr_valid(mem_wr_valid[m]), .wr_ready(mem_wr_ready[m]), .wr_addr(mem_wr_addr[m]),
      .wr_data(mem_wr_data[m]));
  end

  // ---- per-port bookkeeping ------------------------------------------------
  logic [DATA_W-1:0] rdata [NX][logic [ID_W-1:0]];
  bit   got   [NX][logic [ID_W-1:0]];
  int   acks  [NX];
  int   ntfs  [NX][NUM_GRP];
  int   n_hazard = 0, rsp_t [NX];

  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < NX; p++) begin
      if (rsp_valid[p] && rsp_ready[p]) begin
        rsp_t[p] = $time / 10;
        if (rsp[p].kind == RSP_WACK) acks[p]++;
        else begin
          rdata[p][rsp[p].id] = rsp[p].data;
          got[p][rsp[p].id] = 1;
        end
      end
      if (ntf_valid[p]) ntfs[p][ntf_grp[p]]++;
    end
    if (|hazard_stall) n_hazard++;
  end

  // send one request from port p, returns once it is accepted
  task automatic send(input int p, input fh_op_e op, input longint unsigned line,
                      input logic [DATA_W-1:0] d, input logic ntf, input int g,
                      input logic [ID_W-1:0] id);
    @(negedge clk);
    req[p].op = op;
    req[p].addr = ADDR_W'(line * LINE_BYTES);
    req[p].data = d;
    req[p].id = id;
    req[p].notify = ntf;
    req[p].grp = GRP_W'(g);
    req_valid[p] = 1;
    #1;
    while (!req_ready[p]) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 req_valid[p] = 0;
  endtask

  task automatic arm(input int p, input int g, input int n, input logic [3:0] mask);
    logic [DATA_W-1:0] d;
    d = '0;
    d[CNT_W-1:0] = CNT_W'(n);
    d[CNT_W +: MAX_XPU] = MAX_XPU'(mask);
    send(p, OP_NCFG, 0, d, 0, g, 0);
  endtask

  task automatic read_line(input int p, input longint unsigned line, input logic [ID_W-1:0] id,
                           output logic [DATA_W-1:0] d);
    int t = 0;
    got[p][id] = 0;
    send(p, OP_READ, line, '0, 0, 0, id);
    while (!got[p][id] && t < 2000) begin
      @(negedge clk);
      t++;
    end
    d = got[p][id] ? rdata[p][id] : '1;
  endtask

  task automatic wait_ntf(input int p, input int g, input int n);
    int t = 0;
    while (ntfs[p][g] < n && t < 5000) begin
      @(negedge clk);
      t++;
    end
  endtask

  function automatic logic [DATA_W-1:0] part(input int x, input int i);
    logic [DATA_W-1:0] d;
    for (int l = 0; l < LANES; l++) d[l*LANE_W +: LANE_W] = LANE_W'(x * 1000 + i * 17 + l * 3 - 40);
    return d;
  endfunction

  function automatic logic [DATA_W-1:0] sum4(input int i);
    logic [DATA_W-1:0] s;
    for (int l = 0; l < LANES; l++) begin
      int acc;
      acc = 0;
      for (int x = 0; x < NX; x++) acc += x * 1000 + i * 17 + l * 3 - 40;
      s[l*LANE_W +: LANE_W] = LANE_W'(acc);
    end
    return s;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DATA_W-1:0] d;
    int t0, t1, a0;
    req_valid = '0;
    rsp_ready = '1;
    for (int p = 0; p < NX; p++) begin
      req[p] = '0;
      acks[p] = 0;
      for (int g = 0; g < NUM_GRP; g++) ntfs[p][g] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. latency of one read
    g_mem[1].u_mem.poke(LADDR_W'(5), part(7, 7));   // line 21 = 5 * 4 + 1
    t0 = $time / 10 + 1;    // cycle of the accepting edge
    read_line(0, 21, 1, d);
    t1 = rsp_t[0];
    chk(d == part(7, 7), "read data");
    chk(t1 - t0 - LAT <= 10, $sformatf("TAB share of read latency %0d cycles", t1 - t0 - LAT));
    $display("read latency %0d cycles, memory %0d, TAB %0d", t1 - t0, LAT, t1 - t0 - LAT);

    // 1b. posted write: acknowledged by the TAB without a memory round trip
    a0 = acks[0];
    t0 = $time / 10 + 1;
    send(0, OP_WRITE, 22, part(8, 8), 0, 0, 2);
    while (acks[0] == a0 && $time / 10 - t0 < 200) @(negedge clk);
    t1 = $time / 10;
    chk(acks[0] == a0 + 1 && t1 - t0 <= 10, $sformatf("posted write acknowledged after %0d cycles", t1 - t0));
    $display("posted write acknowledged after %0d cycles", t1 - t0);

    // 2. AllReduce / ReduceScatter on lines 1000..1015
    arm(0, 1, NX * 16, 4'b1111);
    fork
      for (int x = 0; x < NX; x++) begin
        automatic int xx = x;
        fork
          for (int i = 0; i < 16; i++) send(xx, OP_WACC, 1000 + i, part(xx, i), 1, 1, ID_W'(i));
        join_none
      end
    join
    wait fork;
    for (int x = 0; x < NX; x++) begin
      wait_ntf(x, 1, 1);
      chk(ntfs[x][1] == 1, $sformatf("AllReduce notification at port %0d", x));
    end
    chk(n_hazard > 0, "same-line write-accumulates from four ports stalled at least once");
    for (int x = 0; x < NX; x++)
      for (int i = 4 * x; i < 4 * x + 4; i++) begin
        read_line(x, 1000 + i, ID_W'(20 + i), d);
        chk(d == sum4(i), $sformatf("ReduceScatter port %0d line %0d", x, i));
      end
    for (int i = 0; i < 16; i++) begin
      read_line(0, 1000 + i, ID_W'(40 + i), d);
      chk(d == sum4(i), $sformatf("AllReduce line %0d", i));
    end

    // 3. AllGather on lines 2000..2015
    arm(3, 2, 16, 4'b1111);
    fork
      for (int x = 0; x < NX; x++) begin
        automatic int xx = x;
        fork
          for (int i = 0; i < 4; i++) send(xx, OP_WRITE, 2000 + 4 * xx + i, part(xx, i + 50), 1, 2, ID_W'(i));
        join_none
      end
    join
    wait fork;
    for (int x = 0; x < NX; x++) begin
      wait_ntf(x, 2, 1);
      chk(ntfs[x][2] == 1, $sformatf("AllGather notification at port %0d", x));
      for (int i = 0; i < 16; i++) begin
        read_line(x, 2000 + i, ID_W'(60 + i), d);
        chk(d == part(i / 4, i % 4 + 50), $sformatf("AllGather port %0d line %0d", x, i));
      end
    end

    // 4. P2P from port 1 to port 2
    arm(1, 3, 3, 4'b0100);
    for (int i = 0; i < 3; i++) send(1, OP_WRITE, 3000 + i, part(9, i), 1, 3, ID_W'(i));
    wait_ntf(2, 3, 1);
    chk(ntfs[2][3] == 1 && ntfs[0][3] == 0 && ntfs[1][3] == 0 && ntfs[3][3] == 0,
        "P2P notification only at the receiver");
    for (int i = 0; i < 3; i++) begin
      read_line(2, 3000 + i, ID_W'(90 + i), d);
      chk(d == part(9, i), $sformatf("P2P line %0d", i));
    end

    // 5. line rate
    repeat (5) @(posedge clk);
    a0 = acks[0] + acks[1] + acks[2] + acks[3];
    t0 = $time / 10;
    fork
      for (int x = 0; x < NX; x++) begin
        automatic int xx = x;
        fork
          // port x starts on module x, then walks over all modules
          for (int i = 0; i < 64; i++) send(xx, OP_WACC, 10000 + 4 * i + (xx + i) % 4, part(xx, i), 0, 0, ID_W'(i));
        join_none
      end
    join
    wait fork;
    while (acks[0] + acks[1] + acks[2] + acks[3] - a0 < 256 && $time / 10 - t0 < 2000) @(negedge clk);
    t1 = $time / 10;
    chk(t1 - t0 <= 64 + LAT + 24, $sformatf("256 write-accumulates took %0d cycles", t1 - t0));
    $display("256 write-accumulates over 4 ports in %0d cycles", t1 - t0);
    $display("hazard stall cycles %0d", n_hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
