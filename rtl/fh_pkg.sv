// fh_pkg: types and constants shared by the FengHuang node RTL.
//
// The node joins several accelerators (xPUs) to a Tensor Addressable Bridge
// (TAB) that owns a striped, shared remote memory. Every xPU talks to the TAB
// over one request channel and one response channel, plus a notification
// output. This package fixes the formats of those channels.
//
// Operations. Read, write and write-accumulate are the three memory
// operations of the TAB; write-accumulate adds the carried line, lane by
// lane, to the line already in remote memory. OP_NCFG is this design's way
// of arming a write-completion group (see fh_notify): its data field holds
// the expected write count in bits [CNT_W-1:0] and the mask of xPUs to notify
// in bits [CNT_W +: MAX_XPU].
//
// Sizes. The default node has four xPUs and one TAB, as in the evaluated
// FH4 systems, and 1152 GB of remote memory, hence the 41-bit byte address.
// The line size (64 B), the lane width (32-bit two's complement integers),
// the id and group widths and the local-memory address width are choices of
// this design; the source text gives none of them.
package fh_pkg;

  // ---- node shape ------------------------------------------------------
  localparam int unsigned DEF_NUM_XPU = 4;   // xPUs on one TAB (FH4)
  localparam int unsigned DEF_NUM_MEM = 4;   // remote memory modules (shards)
  localparam int unsigned MAX_XPU    = 16;   // width of notify masks / port ids
  localparam int unsigned PORT_W     = $clog2(MAX_XPU);

  // ---- data path -------------------------------------------------------
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned DATA_W     = LINE_BYTES * 8;
  localparam int unsigned LANE_W     = 32;
  localparam int unsigned LANES      = DATA_W / LANE_W;
  localparam int unsigned OFS_W      = $clog2(LINE_BYTES);

  // ---- addressing ------------------------------------------------------
  localparam longint unsigned REMOTE_BYTES = 64'd1152 << 30;   // 1152 GB
  localparam int unsigned ADDR_W     = $clog2(REMOTE_BYTES);    // byte address, 41
  localparam int unsigned LADDR_W    = ADDR_W - OFS_W;          // line address
  localparam int unsigned LOC_AW     = 29;  // local memory line address (32 GiB)

  // ---- tags --------------------------------------------------------------
  localparam int unsigned ID_W       = 8;   // request id, echoed in response
  localparam int unsigned GRP_W      = 4;   // completion-notification groups
  localparam int unsigned NUM_GRP    = 1 << GRP_W;
  localparam int unsigned CNT_W      = 32;

  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_WRITE = 2'd1,
    OP_WACC  = 2'd2,   // write-accumulate
    OP_NCFG  = 2'd3    // arm a completion-notification group
  } fh_op_e;

  typedef enum logic {
    RSP_RDATA = 1'b0,  // read data
    RSP_WACK  = 1'b1   // write / write-accumulate committed
  } fh_rsp_e;

  // Request from an xPU to the TAB.
  typedef struct packed {
    fh_op_e              op;
    logic [ADDR_W-1:0]   addr;     // byte address, line aligned
    logic [DATA_W-1:0]   data;
    logic [ID_W-1:0]     id;
    logic                notify;   // count this write in group grp
    logic [GRP_W-1:0]    grp;
  } fh_req_t;

  // Response from the TAB to an xPU.
  typedef struct packed {
    fh_rsp_e             kind;
    logic [DATA_W-1:0]   data;
    logic [ID_W-1:0]     id;
  } fh_rsp_t;

  // Request after the crossbar, inside one shard.
  typedef struct packed {
    fh_op_e              op;
    logic [LADDR_W-1:0]  laddr;    // line address inside the shard
    logic [DATA_W-1:0]   data;
    logic [ID_W-1:0]     id;
    logic                notify;
    logic [GRP_W-1:0]    grp;
    logic [PORT_W-1:0]   port;     // issuing xPU port
  } fh_sreq_t;

  // Response leaving a shard towards the crossbar.
  typedef struct packed {
    fh_rsp_t             rsp;
    logic [PORT_W-1:0]   port;
  } fh_srsp_t;

  // Prefetcher descriptor (one tensor copy of the paging stream).
  typedef enum logic {
    PAGE_IN  = 1'b0,   // remote -> local
    PAGE_OUT = 1'b1    // local -> remote
  } fh_dir_e;

  typedef struct packed {
    fh_dir_e             dir;
    logic [ADDR_W-1:0]   raddr;    // remote byte address of line 0
    logic [LOC_AW-1:0]   laddr;    // local line address of line 0
    logic [23:0]         lines;    // tensor length in lines (>= 1)
    logic [15:0]         kernel;   // index of the kernel that needs it
  } fh_desc_t;

  // Lane-wise sum used by write-accumulate.
  function automatic logic [DATA_W-1:0] lane_add(input logic [DATA_W-1:0] a,
                                                 input logic [DATA_W-1:0] b);
    logic [DATA_W-1:0] s;
    for (int i = 0; i < LANES; i++)
      s[i*LANE_W +: LANE_W] = a[i*LANE_W +: LANE_W] + b[i*LANE_W +: LANE_W];
    return s;
  endfunction

endpackage
