// compute_tile: one tile of the repurposed L1 cache, an 8T SRAM array with decoupled
// read and write ports, used both as a plain memory and for in-memory XNOR.
//
// Every logical row is kept twice, as written and inverted, in two physical rows of
// the same columns (the paper stores S' in a second bitcell of the same column). A
// write drives both. A read raises the read word lines of the two rows with the
// levels rwl_t and rwl_c; a read bit line is discharged when either activated cell
// holds 1, so the sensed value is (row & rwl_t) | (~row & rwl_c):
//   normal read   rwl_t=1,          rwl_c=0          -> the stored row
//   Ising compute rwl_t=sigma_i,    rwl_c=~sigma_i   -> row XNOR sigma_i, all columns
// The array itself is not modified for compute; only the word-line drive differs,
// which is the paper's point. The analog precharge/discharge/sense is abstracted to
// this wired-OR at bit level.
//
// Timing: the sensed row is captured in the row buffer at the clock edge after re
// (one-cycle read, the paper's "cycle 0" of the mixed-stationary pipeline). A write
// takes effect at the clock edge; a read of the same row in that cycle sees the old
// contents. There is no reset: contents are undefined until written.
module compute_tile
  import sachi_pkg::*;
#(
  parameter int unsigned ROWS = TILE_ROWS,
  parameter int unsigned W    = ROW_W,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  // write port (WWL/WBL)
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  // read / compute port (RWL/RBL)
  input  logic          re,
  input  logic [AW-1:0] raddr,
  input  logic          rwl_t,   // drive of the true row's read word line
  input  logic          rwl_c,   // drive of the complement row's read word line
  output logic [W-1:0]  rbuf     // row buffer
);

  logic [W-1:0] arr_t [ROWS];
  logic [W-1:0] arr_c [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      arr_t[waddr] <= wdata;
      arr_c[waddr] <= ~wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (re)
      rbuf <= ({W{rwl_t}} & arr_t[raddr]) | ({W{rwl_c}} & arr_c[raddr]);
  end

endmodule
