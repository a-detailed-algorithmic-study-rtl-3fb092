// hsigma_adder: phase 3 of the mixed-stationary pipeline, the near-memory full adder.
// It starts from the tuple's external field h_i and adds all NBR partial products
// J_ij*sigma_j of the row at once, so one tuple is reduced per cycle:
//   sum = h_i + sum_j J_ij*sigma_j = -H_sigma
// (the sign is restored in phase 4). The paper fixes the function and the single-cycle
// throughput; the adder's structure (a plain sum left to synthesis) and the ACC_W
// width are this design's. ACC_W must cover H_W bits plus (R+1)+clog2(N) bits; the
// defaults (16-bit h, 44 slots of 9-bit products) need 17, ACC_W is 24.
// Purely combinational.
module hsigma_adder
  import sachi_pkg::*;
#(
  parameter int unsigned N  = NBR,
  parameter int unsigned R  = IC_BITS,
  parameter int unsigned HW = H_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic signed [HW-1:0] h,
  input  logic signed [R:0]    prod [N],
  output logic signed [AW-1:0] sum
);

  always_comb begin
    sum = AW'(h);
    for (int k = 0; k < N; k++)
      sum = sum + AW'(prod[k]);
  end

endmodule
