// fh_stripe_map: striping of the shared remote memory over its modules.
//
// The TAB lays every tensor out evenly over all remote memory modules so that
// a stream of consecutive lines uses all of them at once. This block does the
// address split for that layout: the byte address is cut into a line number
// (the line offset bits are dropped), the line number modulo NUM_MEM picks the
// module (shard) and the quotient is the line address inside that module.
// Consecutive lines therefore go to consecutive modules. The striping itself
// follows the source text; the granule (one line) and the modulo order are
// this design's choices. Purely combinational. With a power-of-two NUM_MEM,
// such as the default four, the split reduces to bit selection (no gates);
// with another count, such as six modules, it becomes a constant divider.
module fh_stripe_map
  import fh_pkg::*;
#(
  parameter int unsigned NUM_MEM = fh_pkg::DEF_NUM_MEM,
  localparam int unsigned MW     = $clog2(NUM_MEM > 1 ? NUM_MEM : 2)
) (
  input  logic [ADDR_W-1:0]  addr,
  output logic [MW-1:0]      shard,
  output logic [LADDR_W-1:0] laddr
);
  logic [LADDR_W-1:0] line;

  always_comb begin
    line  = addr[ADDR_W-1:OFS_W];
    shard = MW'(line % LADDR_W'(NUM_MEM));
    laddr = line / LADDR_W'(NUM_MEM);
  end
endmodule
