// tb_fh_prefetcher: self-checking test of the tensor prefetcher.
//
// The TAB is replaced by a responder that keeps remote memory in an
// associative array and answers each request after a random delay, so
// responses come back out of order. The local memory model stalls 20 % of
// the cycles. Checks:
//  1. page-in of 37 lines for kernel 1 while kernel 0 runs (inside the
//     window of one): every local line equals its remote source, and one
//     done event with the right kernel and direction;
//  2. a descriptor for kernel 3 while kernel 1 runs waits (window_stall,
//     no TAB traffic) until kernel 2 starts, then runs;
//  3. page-out of 20 lines: every remote line equals its local source and
//     the descriptor completes only after all write acknowledgements;
//  4. the number of requests in flight never exceeds OUT_D.
module tb_fh_prefetcher;
  import fh_pkg::*;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic desc_valid, desc_ready;
  fh_desc_t desc;
  logic [15:0] exec_kernel;
  logic tab_req_valid, tab_req_ready, tab_rsp_valid, tab_rsp_ready;
  fh_req_t tab_req;
  fh_rsp_t tab_rsp;
  logic lm_valid, lm_ready, lm_we, lm_rvalid;
  logic [LOC_AW-1:0] lm_addr;
  logic [DATA_W-1:0] lm_wdata, lm_rdata;
  logic done_valid, window_stall, busy;
  logic [15:0] done_kernel;
  fh_dir_e done_dir;

  fh_prefetcher dut (.*);

  fh_local_mem_model #(.LINES(1024), .LAT(2), .STALL_PCT(20)) u_lm (
    .clk, .rst_n, .valid(lm_valid), .ready(lm_ready), .we(lm_we), .addr(lm_addr),
    .wdata(lm_wdata), .rvalid(lm_rvalid), .rdata(lm_rdata));

  // ---- TAB responder ----------------------------------------------------
  logic [DATA_W-1:0] rmem [logic [ADDR_W-1:0]];
  typedef struct { fh_rsp_t r; int due; } pend_t;
  pend_t pend [$];
  int cyc = 0, inflight = 0, max_inflight = 0, n_tab = 0, n_stall = 0;
  int sel;

  function automatic logic [DATA_W-1:0] rline(input logic [ADDR_W-1:0] a);
    if (rmem.exists(a)) return rmem[a];
    return {16{a[31:0]}};   // unwritten remote lines hold their address
  endfunction

  assign tab_req_ready = 1'b1;

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (window_stall) n_stall++;
      if (tab_req_valid && tab_req_ready) begin
        pend_t p;
        n_tab++;
        p.r.id = tab_req.id;
        if (tab_req.op == OP_READ) begin
          p.r.kind = RSP_RDATA;
          p.r.data = rline(tab_req.addr);
        end else begin
          p.r.kind = RSP_WACK;
          p.r.data = '0;
          rmem[tab_req.addr] = tab_req.data;
        end
        p.due = cyc + 3 + $urandom % 20;
        pend.push_back(p);
        inflight++;
        if (inflight > max_inflight) max_inflight = inflight;
      end
      if (tab_rsp_valid && tab_rsp_ready) begin
        pend.delete(sel);
        inflight--;
      end
    end
  end

  // present the first due response, starting from a random point
  always @(posedge clk) begin
    #1;
    tab_rsp_valid = 0;
    sel = 0;
    if (pend.size() != 0) begin
      int s0;
      s0 = $urandom % pend.size();
      for (int k = 0; k < pend.size(); k++) begin
        int j;
        j = (s0 + k) % pend.size();
        if (!tab_rsp_valid && pend[j].due <= cyc) begin
          tab_rsp_valid = 1;
          tab_rsp = pend[j].r;
          sel = j;
        end
      end
    end
  end

  // ---- completion monitor --------------------------------------------------
  int n_done = 0;
  int last_kernel = -1;
  fh_dir_e last_dir;
  always @(negedge clk)
    if (rst_n && done_valid) begin
      n_done++;
      last_kernel = done_kernel;
      last_dir = done_dir;
    end

  task automatic push_desc(input fh_dir_e dir, input logic [ADDR_W-1:0] ra,
                           input int la, input int n, input int k);
    @(negedge clk);
    desc_valid  = 1;
    desc.dir    = dir;
    desc.raddr  = ra;
    desc.laddr  = LOC_AW'(la);
    desc.lines  = 24'(n);
    desc.kernel = 16'(k);
    #1;
    while (!desc_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 desc_valid = 0;
  endtask

  task automatic wait_done(input int n);
    int t = 0;
    while (n_done < n && t < 20000) begin
      @(posedge clk);
      t++;
    end
    checks++;
    if (n_done < n) begin
      failures++;
      $display("FAIL descriptor %0d never completed", n);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n0;
    desc_valid = 0;
    desc = '0;
    exec_kernel = 0;
    tab_rsp = '0;
    tab_rsp_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. page-in for the next kernel
    push_desc(PAGE_IN, 41'h10000, 100, 37, 1);
    wait_done(1);
    checks++;
    if (last_kernel != 1 || last_dir != PAGE_IN) begin
      failures++;
      $display("FAIL done event kernel %0d dir %0d", last_kernel, last_dir);
    end
    for (int i = 0; i < 37; i++) begin
      checks++;
      if (u_lm.peek(100 + i) != rline(41'h10000 + i * 64)) begin
        failures++;
        $display("FAIL page-in line %0d", i);
      end
    end

    // 2. window: kernel 3 while kernel 1 runs
    exec_kernel = 1;
    n0 = n_tab;
    push_desc(PAGE_IN, 41'h40000, 300, 8, 3);
    repeat (50) @(posedge clk);
    checks++;
    if (n_tab != n0 || n_stall == 0 || n_done != 1) begin
      failures++;
      $display("FAIL descriptor outside the window started (%0d requests, %0d stall cycles)",
               n_tab - n0, n_stall);
    end
    exec_kernel = 2;
    wait_done(2);
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (u_lm.peek(300 + i) != rline(41'h40000 + i * 64)) begin
        failures++;
        $display("FAIL windowed page-in line %0d", i);
      end
    end

    // 3. page-out of 20 lines written with random data
    for (int i = 0; i < 20; i++) begin
      logic [DATA_W-1:0] d;
      for (int w = 0; w < DATA_W / 32; w++) d[w*32 +: 32] = $urandom();
      u_lm.poke(500 + i, d);
    end
    push_desc(PAGE_OUT, 41'h80000, 500, 20, 2);
    wait_done(3);
    checks++;
    if (last_dir != PAGE_OUT || inflight != 0) begin
      failures++;
      $display("FAIL page-out finished with %0d writes unacknowledged", inflight);
    end
    for (int i = 0; i < 20; i++) begin
      checks++;
      if (rline(41'h80000 + i * 64) != u_lm.peek(500 + i)) begin
        failures++;
        $display("FAIL page-out line %0d", i);
      end
    end

    // 4. outstanding limit
    checks++;
    if (max_inflight > 16 || max_inflight < 2) begin
      failures++;
      $display("FAIL %0d requests in flight", max_inflight);
    end
    $display("max in flight %0d, window stall cycles %0d", max_inflight, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
