// tb_fh_xpu_mux: self-checking test of the xPU port multiplexer.
//
// Both sources send streams of requests with distinct payloads at the same
// time; the TAB side accepts with random back-pressure and answers each
// request with a response echoing its id. Checks: every request reaches the
// TAB once with its source bit set correctly, both sources make progress
// (neither waits more than two grants in a row while both request), and
// every response returns to the source that sent the request.
module tb_fh_xpu_mux;
  import fh_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic core_req_valid, core_req_ready, core_rsp_valid, core_rsp_ready;
  logic pf_req_valid, pf_req_ready, pf_rsp_valid, pf_rsp_ready;
  logic tab_req_valid, tab_req_ready, tab_rsp_valid, tab_rsp_ready;
  fh_req_t core_req, pf_req, tab_req;
  fh_rsp_t core_rsp, pf_rsp, tab_rsp;

  fh_xpu_mux dut (.*);

  fh_rsp_t rq [$];
  int n_core = 0, n_pf = 0, run = 0, max_run = 0, last_src = -1;
  int rc = 0, rp = 0;

  always @(negedge clk) if (rst_n) begin
    if (tab_req_valid && tab_req_ready) begin
      fh_rsp_t r;
      int src;
      src = tab_req.id[ID_W-1];
      checks++;
      // payload tells which source sent it: data[0] = 1 for the prefetcher
      if (src != int'(tab_req.data[0])) begin
        failures++;
        $display("FAIL request from source %0d carries id bit %0d", tab_req.data[0], src);
      end
      if (core_req_valid && pf_req_valid) begin
        run = (src == last_src) ? run + 1 : 1;
        if (run > max_run) max_run = run;
      end
      last_src = src;
      if (src) n_pf++; else n_core++;
      r.kind = RSP_RDATA;
      r.id = tab_req.id;
      r.data = tab_req.data;
      rq.push_back(r);
    end
    if (tab_rsp_valid && tab_rsp_ready) void'(rq.pop_front());
    if (core_rsp_valid && core_rsp_ready) begin
      checks++; rc++;
      if (core_rsp.data[0] != 1'b0) begin
        failures++;
        $display("FAIL prefetcher response delivered to the cores");
      end
    end
    if (pf_rsp_valid && pf_rsp_ready) begin
      checks++; rp++;
      if (pf_rsp.data[0] != 1'b1) begin
        failures++;
        $display("FAIL core response delivered to the prefetcher");
      end
    end
  end

  always @(posedge clk) begin
    #1;
    tab_req_ready  = ($urandom % 4) != 0;
    core_rsp_ready = ($urandom % 4) != 0;
    pf_rsp_ready   = ($urandom % 4) != 0;
    tab_rsp_valid  = rq.size() != 0;
    if (rq.size() != 0) tab_rsp = rq[0];
  end

  task automatic drive(input bit pf, input int n);
    @(posedge clk);
    #2;
    for (int i = 0; i < n; i++) begin
      fh_req_t r;
      r = '0;
      r.op = OP_READ;
      r.id = ID_W'(i);          // cores may not rely on the top id bit
      r.data[0] = pf;
      r.data[31:16] = 16'(i);
      if (pf) begin pf_req = r; pf_req_valid = 1; end
      else    begin core_req = r; core_req_valid = 1; end
      #1;
      while (!(pf ? pf_req_ready : core_req_ready)) begin
        @(posedge clk);
        #3;
      end
      @(posedge clk);
      #2;
    end
    if (pf) pf_req_valid = 0; else core_req_valid = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_req_valid = 0; pf_req_valid = 0;
    core_req = '0; pf_req = '0; tab_rsp = '0; tab_rsp_valid = 0;
    tab_req_ready = 0; core_rsp_ready = 0; pf_rsp_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      drive(0, 200);
      drive(1, 200);
    join
    repeat (100) @(posedge clk);
    checks++;
    if (n_core != 200 || n_pf != 200 || rc != 200 || rp != 200) begin
      failures++;
      $display("FAIL counts: core %0d/%0d pf %0d/%0d", n_core, rc, n_pf, rp);
    end
    checks++;
    if (max_run > 2) begin
      failures++;
      $display("FAIL one source granted %0d times in a row while both waited", max_run);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
