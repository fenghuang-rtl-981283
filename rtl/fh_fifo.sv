// fh_fifo: synchronous show-ahead FIFO used as a buffer throughout the node.
//
// Entries are of type T. in_ready is high while the FIFO is not full; out_valid
// while it is not empty, with out_data the oldest entry. A push and a pop may
// happen in the same cycle; a full FIFO refuses a push even in a cycle in
// which it pops, so in_ready does not depend on out_ready. count gives the fill
// level. Reset empties it. Storage is a register array; depth must be >= 2.
module fh_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  T                         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output T                         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  T                 mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end
endmodule
