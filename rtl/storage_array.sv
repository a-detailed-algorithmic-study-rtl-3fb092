// storage_array: the repurposed L2 cache used as SACHI's storage array. It holds the
// Ising graph as tuples (one row per target spin) and, in a second instance, the
// adjacency information used to route each updated spin to the tuples that hold it.
//
// The paper fixes two read ports; this model adds one write port with a per-bit
// write mask, which is what the spin-update path needs (a spin is one bit inside a
// much wider tuple row). Both reads are synchronous: data appears the cycle after the
// read enable and holds until the next read on that port. A read of a row being
// written in the same cycle returns the old contents. There is no reset; rows are
// undefined until written (the DRAM fill writes every row that is later read).
module storage_array #(
  parameter int unsigned DEPTH = 1600,
  parameter int unsigned W     = 413,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  // read port A
  input  logic          re_a,
  input  logic [AW-1:0] addr_a,
  output logic [W-1:0]  rdata_a,
  // read port B
  input  logic          re_b,
  input  logic [AW-1:0] addr_b,
  output logic [W-1:0]  rdata_b,
  // masked write port
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wmask,
  input  logic [W-1:0]  wdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
  end

  always_ff @(posedge clk) begin
    if (re_a) rdata_a <= mem[addr_a];
    if (re_b) rdata_b <= mem[addr_b];
  end

endmodule
