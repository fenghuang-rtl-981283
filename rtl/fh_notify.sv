// fh_notify: write-completion notification unit of the TAB.
//
// Collective and point-to-point transfers end with the TAB telling the
// participating xPUs that all the writes of a step have landed in remote
// memory. This unit keeps NUM_GRP notification groups. Each group counts the
// writes and write-accumulates tagged with it (notify bit set) as the shard
// engines retire them - any number of shards in the same cycle. An xPU arms
// a group with an OP_NCFG request carrying the expected count and the mask of
// xPUs to notify. Once an armed group's count reaches the expected value the
// unit subtracts that value, disarms the group and posts a notification to
// every xPU in the mask. Counting does not wait for the arming, so writes
// that land before the group is armed are not lost.
//
// Each xPU has one notification output (ntf_valid, ntf_grp), one group per
// cycle, lowest group first; posted notifications wait in a per-xPU pending
// vector, so the output has no ready. Configuration takes one request per
// cycle through a round-robin arbiter over the ports (cfg_ready).
// Timing: a commit seen in cycle t shows as a notification in cycle t+2 if
// nothing else is pending at that xPU.
//
// From the source text: notification once all writes of an operation are
// complete, to all xPUs (AllReduce, AllGather) or to one (P2P). This design's
// choices: groups, counters, the arming request and its encoding.
module fh_notify
  import fh_pkg::*;
#(
  parameter int unsigned NUM_XPU = fh_pkg::DEF_NUM_XPU,
  parameter int unsigned NUM_MEM = fh_pkg::DEF_NUM_MEM,
  parameter int unsigned NUM_G   = fh_pkg::NUM_GRP
) (
  input  logic                clk,
  input  logic                rst_n,
  // arming requests, one per xPU port
  input  logic [NUM_XPU-1:0]  cfg_valid,
  output logic [NUM_XPU-1:0]  cfg_ready,
  input  logic [GRP_W-1:0]    cfg_grp   [NUM_XPU],
  input  logic [CNT_W-1:0]    cfg_count [NUM_XPU],
  input  logic [MAX_XPU-1:0]  cfg_mask  [NUM_XPU],
  // retired writes, one per shard
  input  logic [NUM_MEM-1:0]  commit_valid,
  input  logic [GRP_W-1:0]    commit_grp [NUM_MEM],
  // notifications, one per xPU
  output logic [NUM_XPU-1:0]  ntf_valid,
  output logic [GRP_W-1:0]    ntf_grp    [NUM_XPU]
);
  localparam int unsigned XW = $clog2(NUM_XPU > 1 ? NUM_XPU : 2);

  logic [CNT_W-1:0]   cnt    [NUM_G];
  logic [CNT_W-1:0]   expct  [NUM_G];
  logic [NUM_XPU-1:0] mask   [NUM_G];
  logic [NUM_G-1:0]   armed;
  logic [NUM_G-1:0]   pend   [NUM_XPU];

  // ---------------- configuration arbiter ---------------------------------
  logic [NUM_XPU-1:0] cgnt;
  logic [XW-1:0]      cidx;
  logic               cfg_fire;

  fh_rr_arb #(.N(NUM_XPU)) u_arb (
    .clk, .rst_n, .req(cfg_valid), .advance(1'b1), .grant(cgnt), .gnt_idx(cidx));

  assign cfg_ready = cgnt;
  assign cfg_fire  = |cfg_valid;

  // ---------------- counting ----------------------------------------------
  logic [CNT_W-1:0] cnt_next [NUM_G];
  logic [NUM_G-1:0] fire;

  always_comb begin
    for (int g = 0; g < NUM_G; g++) begin
      cnt_next[g] = cnt[g];
      for (int m = 0; m < NUM_MEM; m++)
        if (commit_valid[m] && commit_grp[m] == GRP_W'(g))
          cnt_next[g] = cnt_next[g] + 1'b1;
      fire[g] = armed[g] && (cnt_next[g] >= expct[g]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= '0;
      for (int g = 0; g < NUM_G; g++) begin
        cnt[g]   <= '0;
        expct[g] <= '0;
        mask[g]  <= '0;
      end
      for (int x = 0; x < NUM_XPU; x++) pend[x] <= '0;
    end else begin
      for (int g = 0; g < NUM_G; g++) begin
        cnt[g] <= fire[g] ? cnt_next[g] - expct[g] : cnt_next[g];
        if (fire[g]) armed[g] <= 1'b0;
      end
      if (cfg_fire) begin
        armed[cfg_grp[cidx]] <= 1'b1;
        expct[cfg_grp[cidx]] <= cfg_count[cidx];
        mask[cfg_grp[cidx]]  <= cfg_mask[cidx][NUM_XPU-1:0];
      end
      for (int x = 0; x < NUM_XPU; x++) begin
        logic [NUM_G-1:0] p;
        p = pend[x];
        if (ntf_valid[x]) p[ntf_grp[x]] = 1'b0;
        for (int g = 0; g < NUM_G; g++)
          if (fire[g] && mask[g][x]) p[g] = 1'b1;
        pend[x] <= p;
      end
    end
  end

  // ---------------- notification output ---------------------------------
  always_comb begin
    for (int x = 0; x < NUM_XPU; x++) begin
      ntf_valid[x] = |pend[x];
      ntf_grp[x]   = '0;
      for (int g = NUM_G - 1; g >= 0; g--)
        if (pend[x][g]) ntf_grp[x] = GRP_W'(g);
    end
  end
endmodule
