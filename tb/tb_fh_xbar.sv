// tb_fh_xbar: self-checking test of the TAB crossbar.
//
// Four xPU ports send random requests; four shard sinks accept them with
// random back-pressure, check that each arrived at the shard its address
// stripes to with the right in-module line address, port and id, and send a
// response back tagged with the port. Each port checks that every response
// it receives belongs to a request it sent. A second phase has every port
// stream to a different shard and checks that four requests pass per cycle.
module tb_fh_xbar;
  import fh_pkg::*;

  localparam int unsigned NX = 4, NM = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NX-1:0] in_valid, in_ready, out_valid, out_ready;
  fh_req_t       in_req  [NX];
  fh_rsp_t       out_rsp [NX];
  logic [NM-1:0] s_valid, s_ready, sr_valid, sr_ready;
  fh_sreq_t      s_req   [NM];
  fh_srsp_t      sr_rsp  [NM];

  fh_xbar #(.NUM_XPU(NX), .NUM_MEM(NM)) dut (.*);

  bit throttle = 1;
  int n_req = 0, n_rsp = 0;
  // ids outstanding per port
  bit outstanding [NX][256];
  // responses queued per shard
  fh_srsp_t rq [NM][$];

  // ---- shard sinks -----------------------------------------------------
  always @(negedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < NM; m++) begin
        if (s_valid[m] && s_ready[m]) begin
          fh_srsp_t r;
          longint unsigned ln;
          int p;
          p = int'(s_req[m].port);
          ln = {s_req[m].laddr, 2'(m)};   // in-module line * 4 + shard
          checks++;
          if (!outstanding[p][s_req[m].id] || s_req[m].op != OP_READ ||
              s_req[m].data[63:0] != 64'(ln * 64)) begin
            failures++;
            $display("FAIL shard %0d got port %0d id %0d line %0h", m, p, s_req[m].id, ln);
          end
          n_req++;
          r.port = s_req[m].port;
          r.rsp.kind = RSP_RDATA;
          r.rsp.id = s_req[m].id;
          r.rsp.data = s_req[m].data;
          rq[m].push_back(r);
        end
        if (sr_valid[m] && sr_ready[m]) void'(rq[m].pop_front());
      end
      // ports receive
      for (int p = 0; p < NX; p++)
        if (out_valid[p] && out_ready[p]) begin
          checks++;
          n_rsp++;
          if (!outstanding[p][out_rsp[p].id]) begin
            failures++;
            $display("FAIL port %0d got response id %0d it does not wait for", p, out_rsp[p].id);
          end
          outstanding[p][out_rsp[p].id] = 0;
        end
    end
  end

  always @(posedge clk) begin
    #1;
    for (int m = 0; m < NM; m++) begin
      s_ready[m]  = !throttle || ($urandom % 3 != 0);
      sr_valid[m] = rq[m].size() != 0;
      if (rq[m].size() != 0) sr_rsp[m] = rq[m][0];
    end
    for (int p = 0; p < NX; p++) out_ready[p] = !throttle || ($urandom % 3 != 0);
  end

  // ---- port drivers ----------------------------------------------------
  task automatic port_drive(input int p, input int n, input bit fixed_shard);
    @(posedge clk);
    #2;
    for (int i = 0; i < n; i++) begin
      logic [7:0] id;
      longint unsigned ln;
      do id = 8'($urandom); while (outstanding[p][id]);
      if (fixed_shard) ln = longint'(($urandom % 1000) * NM + p);
      else             ln = longint'($urandom % 100000);
      in_req[p].op   = OP_READ;
      in_req[p].addr = ADDR_W'(ln * 64);
      in_req[p].data = '0;
      in_req[p].data[63:0] = 64'(ln * 64);
      in_req[p].id   = id;
      in_req[p].notify = 0;
      in_req[p].grp  = '0;
      outstanding[p][id] = 1;
      in_valid[p] = 1;
      #1;
      while (!in_ready[p]) begin
        @(posedge clk);
        #3;
      end
      @(posedge clk);
      #2;
    end
    in_valid[p] = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, acc0;
    in_valid = '0;
    for (int p = 0; p < NX; p++) in_req[p] = '0;
    for (int p = 0; p < NX; p++) for (int i = 0; i < 256; i++) outstanding[p][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random phase
    fork
      port_drive(0, 150, 0);
      port_drive(1, 150, 0);
      port_drive(2, 150, 0);
      port_drive(3, 150, 0);
    join
    repeat (100) @(posedge clk);
    checks++;
    if (n_rsp != 600 || n_req != 600) begin
      failures++;
      $display("FAIL random phase: %0d requests, %0d responses", n_req, n_rsp);
    end
    // full-rate phase: each port streams to its own shard, nothing throttled
    throttle = 0;
    repeat (2) @(posedge clk);
    acc0 = n_req;
    t0 = $time;
    fork
      port_drive(0, 40, 1);
      port_drive(1, 40, 1);
      port_drive(2, 40, 1);
      port_drive(3, 40, 1);
    join
    checks++;
    // 160 requests in 40 port-cycles each: at most 40 + 3 cycles
    if (($time - t0) / 10 > 43 || n_req - acc0 != 160) begin
      failures++;
      $display("FAIL full rate: %0d requests in %0d cycles", n_req - acc0, ($time - t0) / 10);
    end else
      $display("full rate: %0d requests in %0d cycles", n_req - acc0, ($time - t0) / 10);
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
