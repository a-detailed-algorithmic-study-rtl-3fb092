// sim_annealer: phase 4 of the mixed-stationary pipeline, the comparator and the
// simulated-annealing (Metropolis) decision for one target spin.
//
// Input sum = -H_sigma from the adder. The comparator gives the greedy spin
//   updS = +1 if H_sigma < 0,  -1 if H_sigma >= 0   (tie to -1 as in the pseudo-code)
// The annealer then follows the paper's SimAnneal procedure with
//   T = initT/iterNum,  likelihood = exp(-(H(updS)-H(currS))/T)
//   currS <- updS if l < likelihood, else -updS
// where H(s) = -s*sum is the local energy of the target spin, so dH is 0 when the
// spin keeps its value and -2*|sum| when the greedy step flips it.
//
// Fixed point: l and likelihood are unsigned Q8.8 (likelihood saturates just below
// 256). exp(x) is formed as 2^(x*log2 e): y = x*log2(e) in Q.8 (log2 e = 369/256),
// its integer part is a shift and the top four fraction bits index a 16-entry table
//   EXP2_LUT[f] = round(2^(f/16) * 2^15)
// so the likelihood is within about 4.4% of the exact value (the fraction is cut to
// 1/16). initT = 0 turns annealing off (updS is always taken). The formula, number
// formats and the table are this design's; the paper gives only the procedure.
// Purely combinational: the pipeline registers around it give it its own cycle.
module sim_annealer
  import sachi_pkg::*;
#(
  parameter int unsigned AW = ACC_W,
  parameter int unsigned PW = PAR_W
) (
  input  logic signed [AW-1:0] sum,        // -H_sigma
  input  logic                 sigma_cur,  // currS (1 = +1)
  input  logic [PW-1:0]        iter_num,   // iterNum
  input  logic [PW-1:0]        init_t,     // initT
  input  logic [15:0]          l_q8,       // l, unsigned Q8.8
  output logic                 sigma_upd,  // greedy updS
  output logic [15:0]          likelihood, // unsigned Q8.8, saturated
  output logic                 accept,     // l < likelihood
  output logic                 sigma_new   // annealed spin
);

  localparam int unsigned NW = AW + 2 + PW + 1;      // -dH * iterNum
  localparam int unsigned YW = NW + 10;              // times 369

  localparam logic [15:0] EXP2_LUT [16] = '{
    16'd32768, 16'd34219, 16'd35734, 16'd37316, 16'd38968, 16'd40693, 16'd42495, 16'd44376,
    16'd46341, 16'd48393, 16'd50535, 16'd52773, 16'd55109, 16'd57549, 16'd60097, 16'd62757};

  logic signed [AW+1:0] neg_dh;    // -(H(updS) - H(currS))
  logic signed [NW-1:0] numer;
  logic signed [YW-1:0] y_q8;      // -dH*iterNum*log2(e)/initT, Q.8
  logic signed [YW-9:0] k;         // integer part (floor)
  logic [3:0]           f;
  logic [31:0]          mant;

  always_comb begin
    sigma_upd = (sum > 0);
    if (sigma_upd == sigma_cur)
      neg_dh = '0;
    else if (sigma_upd)
      neg_dh = (AW+2)'(sum) <<< 1;     // -1 -> +1: dH = -2*sum
    else
      neg_dh = -((AW+2)'(sum) <<< 1);  // +1 -> -1: dH = +2*sum
    numer = NW'(neg_dh) * $signed({1'b0, iter_num});
    if (init_t == '0)
      y_q8 = '0;
    else
      y_q8 = YW'((YW'(numer) * YW'(369)) / $signed({1'b0, YW'(init_t)}));
    k    = (YW-8)'(y_q8 >>> 8);
    f    = y_q8[7:4];
    mant = 32'(EXP2_LUT[f]);
    if (k >= 8)
      likelihood = 16'hFFFF;
    else if (k >= 0)
      likelihood = 16'((mant << k) >> 7);
    else if (k > -25)
      likelihood = 16'(mant >> (7 - k));
    else
      likelihood = '0;
    accept    = (init_t == '0) || (l_q8 < likelihood);
    sigma_new = accept ? sigma_upd : ~sigma_upd;
  end

endmodule
