// sachi_decoder: instruction decode for SACHI and the cache-mode register.
//
// The host CPU drives SACHI with a repurposed x86 FIST (primary opcode 0xDB) whose
// secondary opcode selects the data movement, and with the added XNORM instruction
// (primary opcode 0x30):
//   PO 0xDB, SO 0x00  DRAM write
//   PO 0xDB, SO 0x01  DRAM to storage array
//   PO 0xDB, SO 0x10  storage array to compute array
//   PO 0x30           XNORM DEST,[SRC1],[SRC2],BIT: in-memory XNOR + near-memory compute
// The cache serves one mode at a time; a special-purpose register selects it
// (spr_we/spr_mode). Compute-side operations (SO 0x10 and XNORM) are decoded only in
// compute mode, and XNORM only for BIT in 1..R (narrower coefficients are stored
// sign-extended to R bits); anything else decodes to OP_ILLEGAL. The opcode values are
// the paper's; operand meanings beyond its one-line description, the illegal rules
// and the register interface are this design's.
// Timing: one register stage; cmd_valid is the input cycle's decode.
module sachi_decoder
  import sachi_pkg::*;
#(
  parameter int unsigned R = IC_BITS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        spr_we,
  input  logic        spr_mode,     // 1 = Ising compute mode
  output logic        mode_compute,
  input  logic        ins_valid,
  input  logic [7:0]  ins_po,
  input  logic [7:0]  ins_so,
  input  logic [31:0] ins_src1,
  input  logic [31:0] ins_src2,
  input  logic [5:0]  ins_bits,
  input  logic [4:0]  ins_dest,
  output logic        cmd_valid,
  output sachi_cmd_t  cmd
);

  sachi_op_e op;

  always_comb begin
    op = OP_ILLEGAL;
    if (ins_po == PO_FIST) begin
      unique case (ins_so)
        SO_DRAM_WRITE:      op = OP_DRAM_WRITE;
        SO_DRAM_TO_STORAGE: op = OP_DRAM_TO_STORAGE;
        SO_STORAGE_TO_COMP: op = mode_compute ? OP_STORAGE_TO_COMP : OP_ILLEGAL;
        default:            op = OP_ILLEGAL;
      endcase
    end else if (ins_po == PO_XNORM) begin
      if (mode_compute && ins_bits != '0 && ins_bits <= 6'(R))
        op = OP_XNORM;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_compute <= 1'b0;
      cmd_valid    <= 1'b0;
      cmd          <= '0;
    end else begin
      if (spr_we) mode_compute <= spr_mode;
      cmd_valid <= ins_valid;
      if (ins_valid)
        cmd <= '{op: op, src1: ins_src1, src2: ins_src2, bits: ins_bits, dest: ins_dest};
    end
  end

endmodule
