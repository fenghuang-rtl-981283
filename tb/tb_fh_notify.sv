// tb_fh_notify: self-checking test of the write-completion notification unit.
//
// Directed cases: an AllReduce-style group (writes from several shards in
// the same cycle, all four xPUs notified), a P2P-style group (one xPU
// notified), writes that land before the group is armed, and two groups
// firing in the same cycle. Each checks which xPUs are told, which group,
// and the two-cycle commit-to-notification latency. A random phase then
// compares the number of notifications per xPU and group with a reference
// count kept in the testbench.
module tb_fh_notify;
  import fh_pkg::*;

  localparam int unsigned NX = 4, NM = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NX-1:0]      cfg_valid, cfg_ready;
  logic [GRP_W-1:0]   cfg_grp   [NX];
  logic [CNT_W-1:0]   cfg_count [NX];
  logic [MAX_XPU-1:0] cfg_mask  [NX];
  logic [NM-1:0]      commit_valid;
  logic [GRP_W-1:0]   commit_grp [NM];
  logic [NX-1:0]      ntf_valid;
  logic [GRP_W-1:0]   ntf_grp    [NX];

  fh_notify #(.NUM_XPU(NX), .NUM_MEM(NM)) dut (.*);

  // notifications seen, per xPU and group
  int seen [NX][NUM_GRP];
  always @(negedge clk)
    if (rst_n)
      for (int x = 0; x < NX; x++)
        if (ntf_valid[x]) seen[x][ntf_grp[x]]++;

  task automatic clear_seen();
    for (int x = 0; x < NX; x++)
      for (int g = 0; g < NUM_GRP; g++) seen[x][g] = 0;
  endtask

  task automatic arm(input int port, input int g, input int n, input logic [3:0] m);
    @(negedge clk);
    cfg_valid[port] = 1'b1;
    cfg_grp[port]   = GRP_W'(g);
    cfg_count[port] = CNT_W'(n);
    cfg_mask[port]  = MAX_XPU'(m);
    #1;
    while (!cfg_ready[port]) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 cfg_valid[port] = 1'b0;
  endtask

  // one cycle of commits: bit m of v set -> shard m retires a write of group g[m]
  task automatic commit(input logic [3:0] v, input int g0, input int g1,
                        input int g2, input int g3);
    @(negedge clk);
    commit_valid  = v;
    commit_grp[0] = GRP_W'(g0);
    commit_grp[1] = GRP_W'(g1);
    commit_grp[2] = GRP_W'(g2);
    commit_grp[3] = GRP_W'(g3);
    @(posedge clk);
    #1 commit_valid = '0;
  endtask

  task automatic expect_seen(input int g, input logic [3:0] m, input string what);
    for (int x = 0; x < NX; x++) begin
      checks++;
      if (seen[x][g] != (m[x] ? 1 : 0)) begin
        failures++;
        $display("FAIL %s: xPU %0d saw %0d notifications of group %0d", what, x, seen[x][g], g);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_cnt [NUM_GRP];
  int ref_exp [NUM_GRP];
  bit ref_arm [NUM_GRP];
  logic [3:0] ref_mask [NUM_GRP];
  int ref_ntf [NX][NUM_GRP];

  initial begin
    int t_last;
    cfg_valid = '0;
    commit_valid = '0;
    for (int x = 0; x < NX; x++) begin
      cfg_grp[x] = '0; cfg_count[x] = '0; cfg_mask[x] = '0;
    end
    for (int m = 0; m < NM; m++) commit_grp[m] = '0;
    clear_seen();
    repeat (3) @(posedge clk);
    rst_n = 1;

    // AllReduce-style: 8 write-accumulates, 4 of them in one cycle
    arm(0, 2, 9, 4'b1111);
    commit(4'b1111, 2, 2, 2, 2);
    commit(4'b1111, 2, 2, 7, 7);
    commit(4'b1111, 7, 7, 2, 2);
    // the ninth lands now; the notification must be out two cycles later
    @(negedge clk);
    checks++;
    if (|ntf_valid) begin
      failures++;
      $display("FAIL notified before the last write");
    end
    commit(4'b0001, 2, 0, 0, 0);
    @(negedge clk);
    checks++;
    if (ntf_valid != 4'b1111 || ntf_grp[0] != 2) begin
      failures++;
      $display("FAIL AllReduce notification not two cycles after last commit: %b", ntf_valid);
    end
    repeat (3) @(negedge clk);
    expect_seen(2, 4'b1111, "allreduce");
    expect_seen(7, 4'b0000, "unarmed group");

    // P2P-style, writes first (group 7 already holds 4 writes), then arming
    clear_seen();
    arm(3, 7, 4, 4'b0010);
    repeat (4) @(negedge clk);
    expect_seen(7, 4'b0010, "p2p after early writes");

    // two groups completing in the same cycle, xPU 0 in both
    clear_seen();
    arm(1, 4, 1, 4'b0001);
    arm(2, 9, 1, 4'b0101);
    commit(4'b0110, 0, 4, 9, 0);
    @(negedge clk);
    checks++;
    if (!(ntf_valid[0] && ntf_grp[0] == 4 && ntf_valid[2] && ntf_grp[2] == 9)) begin
      failures++;
      $display("FAIL simultaneous groups, first cycle");
    end
    @(negedge clk);
    checks++;
    if (!(ntf_valid[0] && ntf_grp[0] == 9)) begin
      failures++;
      $display("FAIL simultaneous groups, second cycle");
    end
    repeat (3) @(negedge clk);
    expect_seen(4, 4'b0001, "group 4");
    expect_seen(9, 4'b0101, "group 9");

    // random phase against a reference count (groups 10..13, fresh)
    clear_seen();
    for (int g = 0; g < NUM_GRP; g++) begin
      ref_cnt[g] = 0; ref_arm[g] = 0; ref_exp[g] = 0; ref_mask[g] = 0;
      for (int x = 0; x < NX; x++) ref_ntf[x][g] = 0;
    end
    for (int it = 0; it < 300; it++) begin
      if ($urandom % 4 == 0) begin
        int g, n;
        logic [3:0] m;
        g = 10 + $urandom % 4;
        if (!ref_arm[g]) begin
          n = 1 + $urandom % 6;
          m = 4'($urandom);
          arm($urandom % NX, g, n, m);
          ref_arm[g] = 1; ref_exp[g] = n; ref_mask[g] = m;
        end
      end else begin
        logic [3:0] v;
        int gg [4];
        v = 4'($urandom);
        for (int m = 0; m < 4; m++) begin
          gg[m] = 10 + $urandom % 4;
          if (v[m]) ref_cnt[gg[m]]++;
        end
        commit(v, gg[0], gg[1], gg[2], gg[3]);
      end
      // reference: fire after the update
      for (int g = 10; g < 14; g++)
        if (ref_arm[g] && ref_cnt[g] >= ref_exp[g]) begin
          ref_cnt[g] -= ref_exp[g];
          ref_arm[g] = 0;
          for (int x = 0; x < NX; x++) if (ref_mask[g][x]) ref_ntf[x][g]++;
        end
    end
    repeat (10) @(negedge clk);
    for (int x = 0; x < NX; x++)
      for (int g = 10; g < 14; g++) begin
        checks++;
        if (seen[x][g] != ref_ntf[x][g]) begin
          failures++;
          $display("FAIL random: xPU %0d group %0d saw %0d, expected %0d",
                   x, g, seen[x][g], ref_ntf[x][g]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
