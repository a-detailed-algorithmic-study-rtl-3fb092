// reuse_aware_decode: phase 2 of the mixed-stationary (SACHI n3) pipeline. It turns
// the in-memory XNOR row of one tuple into the NBR signed products J_ij*sigma_j.
//
// For slot k the row buffer holds, bit for bit, the stored slot XNOR sigma_i:
//   top bit       sigma_ij = sigma_j XNOR sigma_i   (1 when the spins agree)
//   lower R bits  X        = J_ij    XNOR sigma_i   (bitwise)
// "Shift and add" of the R bits rebuilds the R-bit value X (sign-extended to R+1 bits
// here). A 4:1 multiplexer then picks one of X, X+1, ~X+1, ~X from sigma_i and
// sigma_ij:
//   agree,  sigma_i=+1 : X      (X = J,  product  J)
//   agree,  sigma_i=-1 : X + 1  (X = ~J, product -J)
//   differ, sigma_i=+1 : ~X + 1 (X = J,  product -J)
//   differ, sigma_i=-1 : ~X     (X = ~J, product  J)
// The four candidates are those drawn in the paper's phase-2 figure. The paper's
// reuse-aware equation attaches the +1 to the two "differ" cases the other way round,
// which gives J+1 and -J-1 there; this block follows the arithmetic (and the
// mixed-encoding table), which needs the +1 whenever sigma_j is -1.
// Products are R+1 bits so that -(-2^(R-1)) is exact. Purely combinational.
module reuse_aware_decode
  import sachi_pkg::*;
#(
  parameter int unsigned N = NBR,
  parameter int unsigned R = IC_BITS
) (
  input  logic                    sigma_i,            // target spin (1 = +1)
  input  logic [N*(R+1)-1:0]      xrow,               // row buffer (XNOR result)
  output logic signed [R:0]       prod [N]            // J_ij * sigma_j per slot
);

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic              sij;
      logic signed [R:0] x;
      sij = xrow[k*(R+1) + R];
      x   = {xrow[k*(R+1) + R - 1], xrow[k*(R+1) +: R]};  // shift-and-add of the bits, sign-extended
      unique case ({sij, sigma_i})
        2'b11: prod[k] = x;                     // pass
        2'b10: prod[k] = x + 1'b1;              // +1
        2'b01: prod[k] = ~x + 1'b1;             // INV +1
        default: prod[k] = ~x;                  // INV
      endcase
    end
  end

endmodule
