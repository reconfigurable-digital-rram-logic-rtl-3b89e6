// Shared types and sizes of the digital RRAM compute-in-memory system.
//
// The array geometry (two blocks of 512 word lines x 32 bit lines), the four
// logic operations of the reconfigurable unit (NAND, AND, XOR, OR), the 2-bit
// cell and the INT8 weight built from four 2-bit cells follow the paper.
// Lane layout, command encoding and the internal widths of the sequencer are
// choices of this design.
package cim_pkg;

  localparam int ROWS        = 512;  // word lines per block
  localparam int COLS        = 32;   // bit lines per block
  localparam int NBLK        = 2;    // Block One and Block Two
  localparam int LEVEL_W     = 2;    // bits stored per cell
  localparam int NREF        = 3;    // reference settings Vtran1..Vtran3
  localparam int CELLS_PER_W = 4;    // 2-bit cells per INT8 weight
  localparam int LANES       = COLS / CELLS_PER_W;  // INT8 weights per row per block
  localparam int PROD_W      = 16;   // INT8 x INT8 product
  localparam int BIN_W       = LANES * PROD_W / COLS;  // binary-weight product field (4 bits)
  localparam int ACC_W       = 32;   // accumulator word
  localparam int NKERN       = 128;  // kernels tracked by the pruning unit
  localparam int KID_W       = $clog2(NKERN);
  localparam int DIST_W      = 16;
  localparam int ROW_W       = $clog2(ROWS);
  localparam int COL_W       = $clog2(COLS);

  // Logic operation applied by the reconfigurable unit: OUT = (X AND W) op K.
  typedef enum logic [1:0] {
    OP_NAND = 2'd0,
    OP_AND  = 2'd1,
    OP_XOR  = 2'd2,
    OP_OR   = 2'd3
  } logic_op_e;

  // Commands accepted by the top CIM controller.
  typedef enum logic [3:0] {
    CMD_NOP    = 4'd0,
    CMD_FORM   = 4'd1,   // electroform: every cell to a random level
    CMD_PROG   = 4'd2,   // write-verify one cell to a target level
    CMD_LOGIC  = 4'd3,   // one raw bitwise pass over one row of both blocks
    CMD_MAC    = 4'd4,   // INT8 element-wise products of one row, optional VMM accumulate
    CMD_ACCCLR = 4'd5,   // clear the accumulator
    CMD_DIST   = 4'd6,   // distance between two kernels (XOR search-in-memory)
    CMD_PRUNE  = 4'd7,   // frequency check and kernel pruning
    CMD_REPAIR = 4'd8,   // map a faulty row to the backup region
    CMD_READ   = 4'd9    // read the 2-bit level of one cell
  } cmd_e;

  typedef struct packed {
    cmd_e                          op;
    logic                          blk;      // block for PROG/READ
    logic [ROW_W-1:0]              row;      // logical row (first row for DIST)
    logic [ROW_W:0]                nrows;    // row count for DIST
    logic [COL_W-1:0]              col;      // column for PROG/READ
    logic [LEVEL_W-1:0]            level;    // PROG target level
    logic_op_e                     lop;      // LOGIC operation
    logic [1:0]                    ref_sel;  // LOGIC reference 1..3
    logic [COLS-1:0]               x;        // LOGIC bit-line inputs
    logic [COLS-1:0]               k;        // LOGIC K inputs
    logic                          wbin;     // MAC/DIST: binary weights, one per cell
    logic [LANES-1:0][7:0]         xv;       // MAC inputs, one per INT8 lane
    logic [COLS-1:0][BIN_W-1:0]    xb;       // MAC inputs, one per column (binary weights)
    logic [3:0]                    in_bits;  // MAC input bit count 1..8 (1..4 binary)
    logic                          x_signed; // MAC inputs are two's complement
    logic                          acc_en;   // MAC adds its products to the accumulator
    logic [KID_W-1:0]              kbase;    // kernel id of lane 0 of Block One
    logic                          blk_a;    // DIST kernel A block/lane/id
    logic [COL_W-1:0]              lane_a;   // INT8 lane, or column for binary weights
    logic [KID_W-1:0]              id_a;
    logic                          blk_b;    // DIST kernel B block/lane/id
    logic [COL_W-1:0]              lane_b;
    logic [KID_W-1:0]              id_b;
    logic [DIST_W-1:0]             thresh;   // DIST: alpha, PRUNE: beta
    logic [3:0]                    rep_idx;  // REPAIR backup entry
  } cim_cmd_t;

  typedef struct packed {
    logic [NBLK*COLS-1:0]                    raw;    // LOGIC result, OUT[63:0]
    logic [DIST_W-1:0]                       distance; // DIST result
    logic [LEVEL_W-1:0]                      level;  // READ result
    logic                                    err;    // PROG did not converge
  } cim_resp_t;

endpackage
