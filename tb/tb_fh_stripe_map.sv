// tb_fh_stripe_map: self-checking test of the remote-memory striping.
//
// Checks the address split against an independent reference (line number
// from a shift, shard and in-module line from integer arithmetic) for a
// four-module and a six-module layout, on corner and random addresses, and
// checks that a run of consecutive lines visits every module in turn.
module tb_fh_stripe_map;
  import fh_pkg::*;

  int checks = 0, failures = 0;

  logic [ADDR_W-1:0]  addr;
  logic [1:0]         sh4;
  logic [LADDR_W-1:0] la4;
  logic [2:0]         sh6;
  logic [LADDR_W-1:0] la6;

  fh_stripe_map #(.NUM_MEM(4)) u4 (.addr(addr), .shard(sh4), .laddr(la4));
  fh_stripe_map #(.NUM_MEM(6)) u6 (.addr(addr), .shard(sh6), .laddr(la6));

  task automatic check_addr(input logic [ADDR_W-1:0] a);
    longint unsigned ln;
    addr = a;
    #1;
    ln = longint'(a) / LINE_BYTES;
    checks++;
    if (sh4 != 2'(ln % 4) || la4 != LADDR_W'(ln / 4)) begin
      failures++;
      $display("FAIL 4-way addr=%h shard=%0d laddr=%h", a, sh4, la4);
    end
    checks++;
    if (sh6 != 3'(ln % 6) || la6 != LADDR_W'(ln / 6)) begin
      failures++;
      $display("FAIL 6-way addr=%h shard=%0d laddr=%h", a, sh6, la6);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] seen;
    check_addr('0);
    check_addr(ADDR_W'(63));
    check_addr(ADDR_W'(64));
    check_addr(ADDR_W'(REMOTE_BYTES - 64));
    check_addr({ADDR_W{1'b1}});
    for (int i = 0; i < 200; i++)
      check_addr({$urandom(), $urandom()});
    // consecutive lines cover all four modules
    seen = '0;
    for (int i = 0; i < 4; i++) begin
      addr = ADDR_W'(64'h1000 + i * LINE_BYTES);
      #1;
      seen[sh4] = 1'b1;
    end
    checks++;
    if (seen != 4'hf) begin
      failures++;
      $display("FAIL consecutive lines do not cover all modules: %b", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
