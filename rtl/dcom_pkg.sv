// dcom_pkg: types and constants shared by the decomposer array.
//
// The array is built from clusters of 8x8 FP16 processing elements (PEs).
// A "tile" is the 64 FP16 words one cluster touches in one cycle: the PE at
// row i, column j handles lane i*8+j. Cluster commands, reduction modes,
// scatter modes and the host command set of the top level are defined here.
// The FP16 format, the 8x8 PE array and the 16x16 cluster array follow the
// paper; the command encodings are this design's own.
package dcom_pkg;

  typedef logic [15:0] fp16_t;

  localparam int unsigned PE_ROWS = 8;
  localparam int unsigned PE_COLS = 8;
  localparam int unsigned LANES   = PE_ROWS * PE_COLS;

  typedef logic [LANES-1:0][15:0]   tile_t;   // one buffer word = one tile
  typedef logic [PE_ROWS-1:0][15:0] rowvec_t; // one value per PE row
  typedef logic [PE_COLS-1:0][15:0] colvec_t; // one value per PE column

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_QNAN = 16'h7E00;

  // What each PE does with the buffer word read for a cluster command.
  typedef enum logic [2:0] {
    C_NOP   = 3'd0,
    C_LOAD  = 3'd1,  // acc  <= a
    C_DOT   = 3'd2,  // prod <= a * b, products go to the reduction trees
    C_MAC   = 3'd3,  // acc  <= acc - a * b   (or + when neg = 0)
    C_MUL   = 3'd4,  // acc  <= a * b
    C_STORE = 3'd5   // buffer[addr] <= acc
  } cop_e;

  // Where the reduction network sends the products of a C_DOT command.
  typedef enum logic [1:0] {
    RED_ALL = 2'd0,  // row trees, then column tree 0 over the row sums
    RED_ROW = 2'd1,  // 8 row sums
    RED_COL = 2'd2   // 8 column sums
  } red_e;

  // Source of the second PE operand b.
  typedef enum logic [2:0] {
    SC_SCALAR = 3'd0,  // one scalar to all 64 PEs
    SC_ROW    = 3'd1,  // b[i][j] = rowvec[i]
    SC_COL    = 3'd2,  // b[i][j] = colvec[j]
    SC_ACC    = 3'd3,  // b = the PE's own accumulator
    SC_SELF   = 3'd4   // b = a, the buffer word itself (squares)
  } scat_e;

  typedef struct packed {
    cop_e  op;
    red_e  red;
    scat_e scat;
    logic  neg;       // C_MAC: subtract the product
    logic  dot_first; // C_DOT: first tile, restart the dot accumulator
    logic  dot_last;  // C_DOT: last tile, report the accumulated sum
    logic [15:0] addr;
    fp16_t scalar;
  } ccmd_t;

  // Host commands of the top level.
  typedef enum logic [2:0] {
    OP_REORTH = 3'd0,  // z <- z - sum_j (V_j . z) V_j, j < k
    OP_NORM2  = 3'd1,  // result <- z . z
    OP_SCALE  = 3'd2,  // V_dst <- s * z
    OP_LOAD   = 3'd3,  // bank -> cluster buffers, slots [0, nslots)
    OP_STORE  = 3'd4   // cluster buffers -> bank, slots [0, nslots)
  } hop_e;

  typedef struct packed {
    hop_e        op;
    logic [7:0]  k;       // number of basis vectors V_0..V_{k-1}
    logic [7:0]  tiles;   // tiles per vector per cluster (T)
    logic [7:0]  zvec;    // vector index holding z
    logic [7:0]  dstvec;  // OP_SCALE destination vector index
    logic [15:0] nslots;  // OP_LOAD / OP_STORE slot count
    fp16_t       scalar;  // OP_SCALE factor
  } hcmd_t;

endpackage
