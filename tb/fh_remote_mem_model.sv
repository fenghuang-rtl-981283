// fh_remote_mem_model: behavioural model of one remote memory module
// (an LPDDR6 stack with its controller) as seen from a TAB memory port.
// Not synthesizable: it stands in for a commercial part in simulation.
//
// Contents are a sparse associative array of lines; a line never written
// reads as zero. peek/poke give a testbench direct access. The read-command channel takes one command per cycle (ready
// can be throttled with STALL_PCT, percent of cycles not ready); data
// returns in order exactly LAT cycles after the command. The write channel
// takes one write per cycle, applied at that clock edge. Reads sample the
// array when the command is taken.
module fh_remote_mem_model
  import fh_pkg::*;
#(
  parameter int unsigned LAT       = 20,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               rd_valid,
  output logic               rd_ready,
  input  logic [LADDR_W-1:0] rd_addr,
  output logic               rvalid,
  output logic [DATA_W-1:0]  rdata,
  input  logic               wr_valid,
  output logic               wr_ready,
  input  logic [LADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0]  wr_data
);
  logic [DATA_W-1:0] mem [logic [LADDR_W-1:0]];
  logic [DATA_W-1:0] pipe_d [LAT+1];
  logic              pipe_v [LAT+1];
  int unsigned       n_reads = 0, n_writes = 0;

  function automatic logic [DATA_W-1:0] peek(input logic [LADDR_W-1:0] a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  task automatic poke(input logic [LADDR_W-1:0] a, input logic [DATA_W-1:0] d);
    mem[a] = d;
  endtask

  assign wr_ready = 1'b1;
  assign rvalid   = pipe_v[LAT];
  assign rdata    = pipe_d[LAT];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ready <= 1'b1;
      for (int i = 0; i <= LAT; i++) begin
        pipe_v[i] <= 1'b0;
        pipe_d[i] <= '0;
      end
    end else begin
      rd_ready  <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
      pipe_v[1] <= rd_valid && rd_ready;
      pipe_d[1] <= peek(rd_addr);
      for (int i = 2; i <= LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      if (rd_valid && rd_ready) n_reads++;
      if (wr_valid) begin
        mem[wr_addr] = wr_data;   // after the read sample above
        n_writes++;
      end
    end
  end
endmodule
