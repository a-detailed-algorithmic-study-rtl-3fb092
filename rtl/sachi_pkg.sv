// sachi_pkg: sizes, field layouts and shared types of the SACHI mixed-stationary
// (reuse-aware) Ising machine.
//
// A tuple is the unit of work: one target spin sigma_i, its external field h_i and
// NBR neighbour slots {sigma_j, J_ij}. Inside the compute array a tuple occupies one
// row; slot k sits at bits [k*SLOT_W +: SLOT_W], with sigma_j in the slot's top bit and
// J_ij (two's complement, IC_BITS wide) below it, as in the row drawings of the
// mixed-stationary design. Spins are stored as 1 for +1 and 0 for -1.
//
// The default sizes follow the evaluated configuration: 16 compute tiles of 100 tuples
// each, 8-bit interaction coefficients. The number of neighbour slots per row (44),
// the field and accumulator widths and the adjacency entry format are this design's
// choices; see the README for how they were derived.
package sachi_pkg;

  // ---- sizes ----
  parameter int unsigned IC_BITS   = 8;    // J_ij resolution R
  parameter int unsigned NBR       = 44;   // neighbour slots per tuple row
  parameter int unsigned TILE_ROWS = 100;  // tuples (spins) per compute tile
  parameter int unsigned NUM_TILES = 16;   // compute tiles
  parameter int unsigned H_W       = 16;   // external field h_i width
  parameter int unsigned ACC_W     = 24;   // H_sigma accumulator width
  parameter int unsigned PAR_W     = 16;   // annealing parameters (iterNum, initT, l)

  // ---- derived layout ----
  parameter int unsigned SLOT_W     = IC_BITS + 1;
  parameter int unsigned ROW_W      = NBR * SLOT_W;
  parameter int unsigned NUM_TUPLES = NUM_TILES * TILE_ROWS;
  parameter int unsigned TUPLE_W    = ROW_W + H_W + 1;        // {sigma_i, h_i, slots}
  parameter int unsigned TIDX_W     = $clog2(NUM_TUPLES);
  parameter int unsigned SIDX_W     = $clog2(NBR);
  parameter int unsigned ADJ_E_W    = 1 + TIDX_W + SIDX_W;    // {valid, tuple, slot}
  parameter int unsigned ADJ_W      = NBR * ADJ_E_W;
  parameter int unsigned FILL_W     = (ADJ_W > TUPLE_W) ? ADJ_W : TUPLE_W;

  // ---- instruction encodings (repurposed FIST and the XNORM instruction) ----
  parameter logic [7:0] PO_FIST  = 8'hDB;
  parameter logic [7:0] PO_XNORM = 8'h30;
  parameter logic [7:0] SO_DRAM_WRITE       = 8'h00;
  parameter logic [7:0] SO_DRAM_TO_STORAGE  = 8'h01;
  parameter logic [7:0] SO_STORAGE_TO_COMP  = 8'h10;

  typedef enum logic [2:0] {
    OP_NONE            = 3'd0,
    OP_DRAM_WRITE      = 3'd1,
    OP_DRAM_TO_STORAGE = 3'd2,
    OP_STORAGE_TO_COMP = 3'd3,
    OP_XNORM           = 3'd4,
    OP_ILLEGAL         = 3'd5
  } sachi_op_e;

  typedef struct packed {
    sachi_op_e   op;
    logic [31:0] src1;
    logic [31:0] src2;
    logic [5:0]  bits;
    logic [4:0]  dest;
  } sachi_cmd_t;

endpackage
