// sachi_top: SACHI, an all-digital Ising machine built from a CPU's own caches, in its
// mixed-stationary (reuse-aware, "n3") form.
//
// The Ising graph is kept in the storage array (the repurposed L2) as one tuple per
// spin: {sigma_i, h_i, NBR x {sigma_j, J_ij}}, plus an adjacency region that lists,
// for every spin, the (tuple, slot) places holding a copy of it. A sweep copies the
// tuples into the compute tiles (the repurposed L1, 16 tiles x 100 rows), then
// activates one row in every tile per cycle: the read word lines carry sigma_i and
// ~sigma_i, every column of the row senses stored-bit XNOR sigma_i, and the near-L1
// logic turns that into sum_j J_ij*sigma_j + h_i = -H_sigma, the greedy spin and the
// annealed spin, four cycles after activation. Changed spins are written back to the
// storage array (own tuple and every replica found through the adjacency data) while
// the compute array keeps the old values for the rest of the sweep.
//
// Control comes from the host CPU as decoded instructions (repurposed FIST with
// secondary opcode 0x00/0x01/0x10, and XNORM, opcode 0x30), one at a time: ins_ready
// is high when a new instruction may be given; done pulses when it has finished. A
// special-purpose register switches the L1 between normal cache use (l1_* ports read
// and write raw rows) and Ising compute. The DRAM and the CPU are outside: DRAM
// writes and prefetch requests leave through dram_* ports, DRAM packets arrive with the
// DRAM-to-storage instruction (ins_data). Host readback of the storage array uses
// its second read port (st_rd_*: tuple rows below NUM_TUPLES, adjacency rows above).
// Annealing: cfg_init_t (initT, 0 = off) and cfg_l_q8 (the threshold l, Q8.8); iterNum
// is counted by the sequencer.
module sachi_top
  import sachi_pkg::*;
#(
  parameter int unsigned L    = NUM_TILES,
  parameter int unsigned ROWS = TILE_ROWS,
  parameter int unsigned N    = NBR,
  parameter int unsigned R    = IC_BITS,
  parameter int unsigned FD   = 8,
  localparam int unsigned NT  = L * ROWS,
  localparam int unsigned TW  = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RW  = N * (R + 1),
  localparam int unsigned TPW = RW + H_W + 1,
  localparam int unsigned AJW = N * (1 + TW + SW),
  localparam int unsigned FW  = (AJW > TPW) ? AJW : TPW
) (
  input  logic              clk,
  input  logic              rst_n,
  // mode register
  input  logic              spr_we,
  input  logic              spr_mode,
  output logic              mode_compute,
  // instructions
  input  logic              ins_valid,
  output logic              ins_ready,
  input  logic [7:0]        ins_po,
  input  logic [7:0]        ins_so,
  input  logic [31:0]       ins_src1,
  input  logic [31:0]       ins_src2,
  input  logic [5:0]        ins_bits,
  input  logic [4:0]        ins_dest,
  input  logic [FW-1:0]     ins_data,
  output logic              done,
  output logic [4:0]        done_dest,
  output logic              illegal,
  output logic [31:0]       flips,
  output logic [PAR_W-1:0]  iter_num,
  // annealing / prefetch configuration
  input  logic [PAR_W-1:0]  cfg_init_t,
  input  logic [15:0]       cfg_l_q8,
  input  logic [15:0]       cfg_pf_threshold,
  input  logic              cfg_dram_more,
  // DRAM side
  output logic              dram_wr_valid,
  output logic [31:0]       dram_wr_addr,
  output logic [FW-1:0]     dram_wr_data,
  output logic              dram_prefetch_req,
  output logic [15:0]       dram_prefetch_count,
  // storage array readback (port B)
  input  logic              st_rd_en,
  input  logic [TW:0]       st_rd_addr,
  output logic [FW-1:0]     st_rd_data,
  // L1 normal mode
  input  logic              l1_we,
  input  logic              l1_re,
  input  logic [LW-1:0]     l1_tile,
  input  logic [RAW-1:0]    l1_row,
  input  logic [RW-1:0]     l1_wdata,
  output logic [RW-1:0]     l1_rdata,
  // event counters
  output logic [31:0]       stall_cycles,
  output logic [31:0]       spins_written,
  output logic [31:0]       anneal_flips
);

  // ---------------- decode ----------------
  logic        cmd_valid;
  sachi_cmd_t  cmd;
  logic [FW-1:0] data_q;
  logic        inflight;

  sachi_decoder #(.R(R)) u_dec (
    .clk, .rst_n, .spr_we, .spr_mode, .mode_compute,
    .ins_valid(ins_valid && ins_ready), .ins_po, .ins_so, .ins_src1, .ins_src2,
    .ins_bits, .ins_dest, .cmd_valid, .cmd
  );

  logic ctrl_busy, ctrl_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= 1'b0;
    else if (ins_valid && ins_ready) inflight <= 1'b1;
    else if (ctrl_done) inflight <= 1'b0;
  end
  always_ff @(posedge clk) if (ins_valid && ins_ready) data_q <= ins_data;
  assign ins_ready = !inflight;
  assign done      = ctrl_done;
  assign illegal   = cmd_valid && (cmd.op == OP_ILLEGAL);

  // ---------------- sequencer ----------------
  logic            dram_wr, fill_tuple_we, fill_adj_we;
  logic [TW-1:0]   fill_addr;
  logic            st_re;
  logic [TW-1:0]   st_raddr;
  logic [TPW-1:0]  st_rdata;
  logic [L-1:0]    tile_we;
  logic [RAW-1:0]  tile_waddr;
  logic [RW-1:0]   tile_wrow;
  logic            tile_wsigma;
  logic [H_W-1:0]  tile_wh;
  logic            act;
  logic [RAW-1:0]  arow;
  logic [L-1:0]    res_valid, res_old, res_new, res_anneal, res_in;
  logic            upd_push, upd_af, upd_busy;
  logic [TW-1:0]   upd_base;
  logic [L-1:0]    upd_lv, upd_sg;
  logic            pf_load, pf_step;
  logic [15:0]     pf_rows;

  sachi_ctrl #(.L(L), .ROWS(ROWS), .N(N), .R(R)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .busy(ctrl_busy), .done(ctrl_done), .done_dest,
    .flips, .iter_num, .dram_wr, .fill_tuple_we, .fill_adj_we, .fill_addr,
    .st_re, .st_raddr, .st_rdata,
    .tile_we, .tile_waddr, .tile_wrow, .tile_wsigma, .tile_wh,
    .act, .arow, .res_valid, .res_sigma_old(res_old), .res_sigma_new(res_new), .res_in_range(res_in),
    .upd_push, .upd_base, .upd_lane_valid(upd_lv), .upd_sigma(upd_sg),
    .upd_almost_full(upd_af), .upd_busy,
    .pf_load, .pf_rows, .pf_step, .stall_cycles
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dram_wr_valid <= 1'b0;
      dram_wr_addr  <= '0;
      dram_wr_data  <= '0;
    end else begin
      dram_wr_valid <= dram_wr;
      if (dram_wr) begin
        dram_wr_addr <= cmd.src1;
        dram_wr_data <= data_q;
      end
    end
  end

  // ---------------- storage array: tuples and adjacency ----------------
  logic            su_we;
  logic [TW-1:0]   su_waddr;
  logic [TPW-1:0]  su_wmask, su_wdata;
  logic            adj_re;
  logic [TW-1:0]   adj_addr;
  logic [AJW-1:0]  adj_rdata, adj_rdata_b;
  logic [TPW-1:0]  tup_rdata_b;
  logic            rd_adj_q;

  storage_array #(.DEPTH(NT), .W(TPW)) u_tuples (
    .clk,
    .re_a(st_re), .addr_a(st_raddr), .rdata_a(st_rdata),
    .re_b(st_rd_en && st_rd_addr < (TW+1)'(NT)), .addr_b(TW'(st_rd_addr)), .rdata_b(tup_rdata_b),
    .we(su_we || fill_tuple_we),
    .waddr(su_we ? su_waddr : fill_addr),
    .wmask(su_we ? su_wmask : '1),
    .wdata(su_we ? su_wdata : data_q[TPW-1:0])
  );

  storage_array #(.DEPTH(NT), .W(AJW)) u_adjacency (
    .clk,
    .re_a(adj_re), .addr_a(adj_addr), .rdata_a(adj_rdata),
    .re_b(st_rd_en && st_rd_addr >= (TW+1)'(NT)), .addr_b(TW'(st_rd_addr - (TW+1)'(NT))),
    .rdata_b(adj_rdata_b),
    .we(fill_adj_we), .waddr(fill_addr), .wmask('1), .wdata(data_q[AJW-1:0])
  );

  always_ff @(posedge clk) if (st_rd_en) rd_adj_q <= (st_rd_addr >= (TW+1)'(NT));
  assign st_rd_data = rd_adj_q ? FW'(adj_rdata_b) : FW'(tup_rdata_b);

  // ---------------- spin update ----------------
  spin_update_unit #(.L(L), .N(N), .R(R), .NT(NT), .FD(FD)) u_upd (
    .clk, .rst_n,
    .push_valid(upd_push), .push_base(upd_base), .push_lane_valid(upd_lv), .push_sigma(upd_sg),
    .almost_full(upd_af),
    .st_we(su_we), .st_waddr(su_waddr), .st_wmask(su_wmask), .st_wdata(su_wdata),
    .adj_re, .adj_addr, .adj_rdata,
    .busy(upd_busy), .spins_written
  );

  // ---------------- prefetch counter ----------------
  dram_prefetch_ctrl #(.CW(16)) u_pf (
    .clk, .rst_n, .load(pf_load), .rows(pf_rows), .row_step(pf_step),
    .threshold(cfg_pf_threshold), .more_pending(cfg_dram_more),
    .remaining(), .prefetch_req(dram_prefetch_req), .req_count(dram_prefetch_count)
  );

  // ---------------- compute tiles ----------------
  logic [RW-1:0] ndata [L];
  logic [RAW-1:0] res_row [L];
  logic [LW-1:0] l1_tile_q;

  for (genvar g = 0; g < L; g++) begin : g_tile
    logic nwe;
    assign nwe = l1_we && !mode_compute && (l1_tile == LW'(g));
    sachi_tile #(.ROWS(ROWS), .N(N), .R(R)) u_tile (
      .clk, .rst_n, .mode_compute,
      .we(tile_we[g] || nwe),
      .waddr(nwe ? l1_row : tile_waddr),
      .wrow(nwe ? l1_wdata : tile_wrow),
      .wsigma(nwe ? 1'b0 : tile_wsigma),
      .wh(nwe ? '0 : tile_wh),
      .act, .arow,
      .nre(l1_re && (l1_tile == LW'(g))), .nrow(l1_row), .ndata(ndata[g]),
      .iter_num, .init_t(cfg_init_t), .l_q8(cfg_l_q8),
      .out_valid(res_valid[g]), .out_row(res_row[g]),
      .out_sigma_old(res_old[g]), .out_sigma_new(res_new[g]),
      .out_anneal_flip(res_anneal[g])
    );
  end

  always_ff @(posedge clk) if (l1_re) l1_tile_q <= l1_tile;
  assign l1_rdata = ndata[l1_tile_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) anneal_flips <= '0;
    else        anneal_flips <= anneal_flips + 32'($countones(res_valid & res_in & res_anneal));
  end

endmodule
