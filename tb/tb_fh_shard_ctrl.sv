// tb_fh_shard_ctrl: self-checking test of the per-module memory engine.
//
// A memory model with a 20-cycle read latency sits behind the engine. The
// test checks, against a reference copy of memory kept in the testbench:
//  1. write then read of a line;
//  2. a burst of write-accumulates into one line (exercises the same-line
//     hazard stall; the final sum must count every addend);
//  3. line rate: 64 write-accumulates to different lines must finish within
//     64 + latency + 8 cycles, i.e. one per cycle;
//  4. 600 random reads, writes and write-accumulates on 8 lines, with
//     random memory back-pressure off and responses checked in order;
//  5. one commit event per "notify" write.
module tb_fh_shard_ctrl;
  import fh_pkg::*;

  localparam int unsigned LAT = 20;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, rsp_valid, rsp_ready;
  fh_sreq_t req;
  fh_srsp_t rsp;
  logic mem_rd_valid, mem_rd_ready, mem_rvalid, mem_wr_valid, mem_wr_ready;
  logic [LADDR_W-1:0] mem_rd_addr, mem_wr_addr;
  logic [DATA_W-1:0] mem_rdata, mem_wr_data;
  logic commit_valid, hazard_stall;
  logic [GRP_W-1:0] commit_grp;

  fh_shard_ctrl dut (.*);

  fh_remote_mem_model #(.LAT(LAT)) u_mem (
    .clk, .rst_n,
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rvalid(mem_rvalid), .rdata(mem_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr),
    .wr_data(mem_wr_data));

  // reference memory and expected responses
  logic [DATA_W-1:0] ref_mem [logic [LADDR_W-1:0]];
  fh_rsp_t exp_q [$];
  int n_rsp = 0, n_commit = 0, n_hazard = 0;

  function automatic logic [DATA_W-1:0] ref_rd(input logic [LADDR_W-1:0] a);
    if (ref_mem.exists(a)) return ref_mem[a];
    return '0;
  endfunction

  function automatic logic [DATA_W-1:0] rnd_line();
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = $urandom();
    return d;
  endfunction

  // the reference sum is computed lane by lane with plain integers
  function automatic logic [DATA_W-1:0] ref_add(input logic [DATA_W-1:0] a,
                                                input logic [DATA_W-1:0] b);
    logic [DATA_W-1:0] s;
    for (int i = 0; i < DATA_W / 32; i++) begin
      int unsigned x, y;
      x = a[i*32 +: 32];
      y = b[i*32 +: 32];
      s[i*32 +: 32] = x + y;
    end
    return s;
  endfunction

  // issue one request; the reference model is updated in issue order,
  // which the engine must reproduce
  task automatic send(input fh_op_e op, input logic [LADDR_W-1:0] a,
                      input logic [DATA_W-1:0] d, input logic ntf);
    fh_rsp_t e;
    @(negedge clk);
    req_valid  = 1'b1;
    req.op     = op;
    req.laddr  = a;
    req.data   = d;
    req.id     = ID_W'($urandom());
    req.notify = ntf;
    req.grp    = GRP_W'(3);
    req.port   = PORT_W'(2);
    e.id = req.id;
    case (op)
      OP_READ:  begin e.kind = RSP_RDATA; e.data = ref_rd(a); end
      OP_WRITE: begin e.kind = RSP_WACK;  e.data = '0; ref_mem[a] = d; end
      default:  begin e.kind = RSP_WACK;  e.data = '0; ref_mem[a] = ref_add(ref_rd(a), d); end
    endcase
    exp_q.push_back(e);
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 1'b0;
  endtask

  // response checker; samples between edges, where the handshake is stable
  always @(negedge clk) begin
    if (rst_n && rsp_valid && rsp_ready) begin
      fh_rsp_t e;
      n_rsp++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected response");
      end else begin
        e = exp_q.pop_front();
        if (rsp.rsp != e || rsp.port != PORT_W'(2)) begin
          failures++;
          $display("FAIL response kind=%0d id=%0d data=%h, expected kind=%0d id=%0d data=%h",
                   rsp.rsp.kind, rsp.rsp.id, rsp.rsp.data[63:0], e.kind, e.id, e.data[63:0]);
        end
      end
    end
    if (rst_n && commit_valid) begin
      n_commit++;
      if (commit_grp != GRP_W'(3)) begin
        failures++;
        $display("FAIL commit group %0d", commit_grp);
      end
    end
    if (rst_n && hazard_stall) n_hazard++;
  end

  task automatic drain();
    int t = 0;
    while (exp_q.size() != 0 && t < 5000) begin
      @(posedge clk);
      t++;
    end
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d responses missing", exp_q.size());
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_notify = 0;
    int t0, t1;
    logic [DATA_W-1:0] d;
    req_valid = 0;
    req       = '0;
    rsp_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;

    // 1. write then read
    d = rnd_line();
    send(OP_WRITE, 35'h12345, d, 1'b1); n_notify++;
    send(OP_READ,  35'h12345, '0, 1'b0);
    drain();

    // 2. accumulate burst into one line
    for (int i = 0; i < 8; i++) begin
      send(OP_WACC, 35'h77, rnd_line(), 1'b1);
      n_notify++;
    end
    send(OP_READ, 35'h77, '0, 1'b0);
    drain();
    checks++;
    if (n_hazard == 0) begin
      failures++;
      $display("FAIL same-line accumulates never stalled");
    end
    checks++;
    if (u_mem.peek(35'h77) != ref_rd(35'h77)) begin
      failures++;
      $display("FAIL memory contents after accumulate burst");
    end

    // 3. line rate
    t0 = $time;
    for (int i = 0; i < 64; i++) send(OP_WACC, LADDR_W'(1000 + i), rnd_line(), 1'b0);
    drain();
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 64 + LAT + 8) begin
      failures++;
      $display("FAIL 64 write-accumulates took %0d cycles", (t1 - t0) / 10);
    end else
      $display("64 write-accumulates in %0d cycles", (t1 - t0) / 10);

    // 4. random mix, with response back-pressure
    fork
      begin
        for (int i = 0; i < 600; i++) begin
          int r;
          r = $urandom % 3;
          send(fh_op_e'(r), LADDR_W'($urandom % 8), rnd_line(), r != 0);
          if (r != 0) n_notify++;
        end
      end
      begin
        repeat (1200) begin
          @(posedge clk);
          #1 rsp_ready = ($urandom % 4) != 0;
        end
        rsp_ready = 1;
      end
    join
    rsp_ready = 1;
    drain();
    for (int a = 0; a < 8; a++) begin
      checks++;
      if (u_mem.peek(LADDR_W'(a)) != ref_rd(LADDR_W'(a))) begin
        failures++;
        $display("FAIL memory line %0d", a);
      end
    end

    // 5. commit events
    checks++;
    if (n_commit != n_notify) begin
      failures++;
      $display("FAIL %0d commit events, expected %0d", n_commit, n_notify);
    end
    $display("responses=%0d hazard_stall_cycles=%0d commits=%0d", n_rsp, n_hazard, n_commit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
