// sachi_tile: one compute tile of the repurposed L1 cache together with its near-L1
// logic, i.e. the complete mixed-stationary (SACHI n3) datapath for up to ROWS
// tuples. One tuple enters per cycle and one updated spin leaves per cycle.
//
// Contents: the compute_tile SRAM (neighbour slots {sigma_j, J_ij} of each tuple),
// a tuple-header buffer holding each row's target spin sigma_i (the value put on the
// read word line) and external field h_i, and the three near-memory phases.
//
// Pipeline (act = activate row arow in compute mode):
//   cycle 0  phase 1: RWL(row)=sigma_i, RWL(row')=~sigma_i, all columns sensed into
//            the row buffer (in-memory XNOR, N*R bits in parallel)
//   cycle 1  phase 2: reuse_aware_decode -> NBR products J_ij*sigma_j (registered)
//   cycle 2  phase 3: hsigma_adder, initialised with h_i -> -H_sigma (registered)
//   cycle 3  phase 4: sim_annealer -> out_valid with the new spin (registered)
// so out_valid follows act by 4 clock edges, as in the paper's phase drawing (one
// cycle per phase). The stage registers and the header buffer are this design's way
// to deliver sigma_i and h_i; the paper says only that sigma_i comes from the storage
// array and that the adder is initialised with h_i.
//
// Normal (cache) mode: nre reads row nrow unchanged (RWL of the true row only), the
// data appears on ndata one cycle later. act is ignored outside compute mode and nre
// inside it (the cache serves one mode at a time). Rows are written through the
// write port in either mode.
module sachi_tile
  import sachi_pkg::*;
#(
  parameter int unsigned ROWS = TILE_ROWS,
  parameter int unsigned N    = NBR,
  parameter int unsigned R    = IC_BITS,
  parameter int unsigned HW   = H_W,
  parameter int unsigned AW   = ACC_W,
  parameter int unsigned PW   = PAR_W,
  localparam int unsigned W   = N * (R + 1),
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mode_compute,
  // row load (from the storage array or a normal cache write)
  input  logic                 we,
  input  logic [RAW-1:0]       waddr,
  input  logic [W-1:0]         wrow,
  input  logic                 wsigma,
  input  logic signed [HW-1:0] wh,
  // compute issue
  input  logic                 act,
  input  logic [RAW-1:0]       arow,
  // normal-mode read
  input  logic                 nre,
  input  logic [RAW-1:0]       nrow,
  output logic [W-1:0]         ndata,
  // annealing parameters
  input  logic [PW-1:0]        iter_num,
  input  logic [PW-1:0]        init_t,
  input  logic [15:0]          l_q8,
  // result
  output logic                 out_valid,
  output logic [RAW-1:0]       out_row,
  output logic                 out_sigma_old,
  output logic                 out_sigma_new,
  output logic                 out_anneal_flip  // annealer overruled the greedy spin
);

  // ---------------- tuple header buffer ----------------
  logic                 hdr_sigma [ROWS];
  logic signed [HW-1:0] hdr_h     [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      hdr_sigma[waddr] <= wsigma;
      hdr_h[waddr]     <= wh;
    end
  end

  // ---------------- phase 1: in-memory XNOR ----------------
  logic          do_act, do_nre, rwl_t, rwl_c, re;
  logic [RAW-1:0] raddr;
  logic [W-1:0]  rbuf;

  assign do_act = act & mode_compute;
  assign do_nre = nre & ~mode_compute;
  assign re     = do_act | do_nre;
  assign raddr  = do_act ? arow : nrow;
  assign rwl_t  = do_act ? hdr_sigma[arow]  : 1'b1;
  assign rwl_c  = do_act ? ~hdr_sigma[arow] : 1'b0;
  assign ndata  = rbuf;

  compute_tile #(.ROWS(ROWS), .W(W)) u_array (
    .clk, .we, .waddr, .wdata(wrow),
    .re, .raddr, .rwl_t, .rwl_c, .rbuf
  );

  logic                 s1_v, s2_v, s3_v;
  logic [RAW-1:0]       s1_row, s2_row, s3_row;
  logic                 s1_sig, s2_sig, s3_sig;
  logic signed [HW-1:0] s1_h, s2_h;
  logic signed [R:0]    s2_prod [N];
  logic signed [AW-1:0] s3_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= do_act;
  end
  always_ff @(posedge clk) begin
    if (do_act) begin
      s1_row <= arow;
      s1_sig <= hdr_sigma[arow];
      s1_h   <= hdr_h[arow];
    end
  end

  // ---------------- phase 2: shift-and-add + 4:1 decision ----------------
  logic signed [R:0] prod [N];
  reuse_aware_decode #(.N(N), .R(R)) u_dec (.sigma_i(s1_sig), .xrow(rbuf), .prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_v <= 1'b0;
    else        s2_v <= s1_v;
  end
  always_ff @(posedge clk) begin
    if (s1_v) begin
      s2_prod <= prod;
      s2_row  <= s1_row;
      s2_sig  <= s1_sig;
      s2_h    <= s1_h;
    end
  end

  // ---------------- phase 3: accumulation from h_i ----------------
  logic signed [AW-1:0] sum;
  hsigma_adder #(.N(N), .R(R), .HW(HW), .AW(AW)) u_add (.h(s2_h), .prod(s2_prod), .sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s3_v <= 1'b0;
    else        s3_v <= s2_v;
  end
  always_ff @(posedge clk) begin
    if (s2_v) begin
      s3_sum <= sum;
      s3_row <= s2_row;
      s3_sig <= s2_sig;
    end
  end

  // ---------------- phase 4: comparator + simulated annealing ----------------
  logic        upd, acc, snew;
  logic [15:0] lik;
  sim_annealer #(.AW(AW), .PW(PW)) u_ann (
    .sum(s3_sum), .sigma_cur(s3_sig), .iter_num, .init_t, .l_q8,
    .sigma_upd(upd), .likelihood(lik), .accept(acc), .sigma_new(snew)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s3_v;
  end
  always_ff @(posedge clk) begin
    if (s3_v) begin
      out_row       <= s3_row;
      out_sigma_old <= s3_sig;
      out_sigma_new <= snew;
      out_anneal_flip <= ~acc;
    end
  end

endmodule
