// fh_local_mem_model: behavioural model of an xPU's local memory (HBM) as
// seen by the tensor prefetcher. Not synthesizable; it stands in for a
// commercial part in simulation.
//
// LINES lines of DATA_W bits, addressed modulo LINES. One command per cycle
// when ready; ready is low in STALL_PCT percent of cycles. Writes apply at
// the clock edge; read data returns in order LAT cycles after the command.
module fh_local_mem_model
  import fh_pkg::*;
#(
  parameter int unsigned LINES     = 4096,
  parameter int unsigned LAT       = 2,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid,
  output logic              ready,
  input  logic              we,
  input  logic [LOC_AW-1:0] addr,
  input  logic [DATA_W-1:0] wdata,
  output logic              rvalid,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [LINES];
  logic              pv [LAT+1];
  logic [DATA_W-1:0] pd [LAT+1];

  function automatic logic [DATA_W-1:0] peek(input int a);
    return mem[a % LINES];
  endfunction

  task automatic poke(input int a, input logic [DATA_W-1:0] d);
    mem[a % LINES] = d;
  endtask

  initial for (int i = 0; i < LINES; i++) mem[i] = '0;

  assign rvalid = pv[LAT];
  assign rdata  = pd[LAT];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready <= 1'b1;
      for (int i = 0; i <= LAT; i++) begin
        pv[i] <= 1'b0;
        pd[i] <= '0;
      end
    end else begin
      ready <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
      pv[1] <= valid && ready && !we;
      pd[1] <= mem[int'(addr) % LINES];
      for (int i = 2; i <= LAT; i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      if (valid && ready && we) mem[int'(addr) % LINES] = wdata;
    end
  end
endmodule
