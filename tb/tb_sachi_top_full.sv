// tb_sachi_top_full: the end-to-end test of tb_sachi_top at the default sizes
// (16 tiles x 100 rows = 1600 spins on a 40 x 40 King's graph, 44 slots, 8-bit ICs,
// top parameters untouched). Otherwise identical:
// end-to-end test of the Ising machine on a King's-graph problem (the
// graph of the molecular-dynamics workload) with random signed couplings and fields.
// The testbench plays the host CPU and DRAM: it issues the decoded instructions,
// fills the storage array with tuples and adjacency rows, and after every sweep reads
// the whole storage array back. A plain integer model of the Ising update (all spins
// from the previous sweep's values, +1 iff h_i + sum J_ij*sigma_j > 0) predicts every
// spin; every replica slot of every spin must agree with it too.
// Sequence: normal-mode L1 write/read, DRAM write forwarding, an illegal instruction,
// switch to compute mode, fill, then sweeps of transfer + XNORM: greedy sweeps, one
// sweep with annealing set so that every spin is overruled, and one sweep with the
// prefetch counter armed. Finally back to normal mode and an L1 row read.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_sachi_top_full;
  import sachi_pkg::*;
  // sizes of this run
  localparam int unsigned L_    = NUM_TILES;
  localparam int unsigned ROWS_ = TILE_ROWS;
  localparam int unsigned N_    = NBR;
  localparam int unsigned R_    = IC_BITS;
  localparam int unsigned GW    = 40;         // grid width; height = NS/GW
  localparam int unsigned SWEEPS = 3;
  localparam int unsigned WATCHDOG_CYCLES = 2_000_000;
  // derived
  localparam int unsigned NS  = L_ * ROWS_;
  localparam int unsigned TW  = $clog2(NS);
  localparam int unsigned RAW = (ROWS_ > 1) ? $clog2(ROWS_) : 1;
  localparam int unsigned LW  = (L_ > 1) ? $clog2(L_) : 1;
  localparam int unsigned SW  = (N_ > 1) ? $clog2(N_) : 1;
  localparam int unsigned EW  = 1 + TW + SW;
  localparam int unsigned RW  = N_ * (R_ + 1);
  localparam int unsigned TPW = RW + H_W + 1;
  localparam int unsigned AJW = N_ * EW;
  localparam int unsigned FW  = (AJW > TPW) ? AJW : TPW;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic rst_n, spr_we, spr_mode, mode_compute, ins_valid, ins_ready, done, illegal;
  logic [7:0] ins_po, ins_so;
  logic [31:0] ins_src1, ins_src2, flips, stall_cycles, spins_written, anneal_flips, dram_wr_addr;
  logic [5:0] ins_bits;
  logic [4:0] ins_dest, done_dest;
  logic [FW-1:0] ins_data, dram_wr_data, st_rd_data;
  logic [PAR_W-1:0] iter_num, cfg_init_t;
  logic [15:0] cfg_l_q8, cfg_pf_threshold, dram_prefetch_count;
  logic cfg_dram_more, dram_wr_valid, dram_prefetch_req, st_rd_en, l1_we, l1_re;
  logic [TW:0] st_rd_addr;
  logic [LW-1:0] l1_tile;
  logic [RAW-1:0] l1_row;
  logic [RW-1:0] l1_wdata, l1_rdata;

  sachi_top dut (.*);

  int checks = 0, failures = 0;
  task automatic ck(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- problem ----------------
  int nb   [NS][N_];     // neighbour spin per slot, -1 = empty
  int jv   [NS][N_];
  int hv   [NS];
  bit sp   [NS];
  int ndeg [NS];

  function automatic int jsym(int a, int b);   // symmetric random coupling
    int x;
    x = (a < b) ? (a * 7919 + b * 104729) : (b * 7919 + a * 104729);
    x = (x ^ (x >> 7)) * 2654435761;
    return int'(x % (1 << R_)) - (1 << (R_ - 1)) + ((x % (1 << R_)) < 0 ? (1 << R_) : 0);
  endfunction

  task automatic build_graph();
    for (int i = 0; i < NS; i++) begin
      int x, y;
      x = i % GW; y = i / GW; ndeg[i] = 0;
      for (int k = 0; k < N_; k++) begin nb[i][k] = -1; jv[i][k] = 0; end
      for (int dy = -1; dy <= 1; dy++)
        for (int dx = -1; dx <= 1; dx++) begin
          int xx, yy;
          xx = x + dx; yy = y + dy;
          if ((dx != 0 || dy != 0) && xx >= 0 && xx < GW && yy >= 0 && yy < NS / GW && ndeg[i] < N_) begin
            nb[i][ndeg[i]] = yy * GW + xx;
            jv[i][ndeg[i]] = jsym(i, yy * GW + xx);
            ndeg[i]++;
          end
        end
      hv[i] = int'($urandom_range(0, 40)) - 20;
      sp[i] = 1'($urandom);
    end
  endtask

  function automatic logic [FW-1:0] tuple_word(int i);
    logic [TPW-1:0] w;
    w = '0;
    for (int k = 0; k < N_; k++)
      if (nb[i][k] >= 0) w[k*(R_+1) +: R_+1] = {sp[nb[i][k]], R_'(jv[i][k])};
    w[RW +: H_W] = H_W'(hv[i]);
    w[RW + H_W]  = sp[i];
    return FW'(w);
  endfunction

  function automatic logic [FW-1:0] adj_word(int j);
    logic [AJW-1:0] w;
    int e;
    w = '0; e = 0;
    for (int i = 0; i < NS; i++)
      for (int k = 0; k < N_; k++)
        if (nb[i][k] == j) begin
          w[e*EW +: EW] = {1'b1, TW'(i), SW'(k)};
          e++;
        end
    return FW'(w);
  endfunction

  // ---------------- host actions ----------------
  task automatic ins(input logic [7:0] po, so, input int s1, s2, input logic [FW-1:0] d = '0);
    @(negedge clk);
    while (!ins_ready) @(negedge clk);
    ins_valid = 1; ins_po = po; ins_so = so; ins_src1 = 32'(s1); ins_src2 = 32'(s2);
    ins_bits = 6'(R_); ins_dest = 5'(s1); ins_data = d;
    @(negedge clk);
    ins_valid = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic set_mode(input logic m);
    @(negedge clk); spr_we = 1; spr_mode = m;
    @(negedge clk); spr_we = 0;
  endtask

  logic [TPW-1:0] rb [NS];
  task automatic readback();
    for (int t = 0; t < NS; t++) begin
      @(negedge clk); st_rd_en = 1; st_rd_addr = (TW+1)'(t);
      @(negedge clk); st_rd_en = 0;
      rb[t] = st_rd_data[TPW-1:0];
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_mode_switch = 0, n_l1_normal = 0, n_dram_wr = 0, n_illegal = 0, n_fill = 0;
  int n_xfer = 0, n_sweep = 0, n_replica_upd = 0, n_stall = 0, n_prefetch = 0, n_anneal = 0;
  always @(posedge clk) begin
    if (dram_wr_valid) n_dram_wr++;
    if (illegal) n_illegal++;
    if (dram_prefetch_req) n_prefetch++;
  end

  initial begin
    bit expv [NS];
    int t_start;
    logic [RW-1:0] row0;
    rst_n = 0; spr_we = 0; spr_mode = 0; ins_valid = 0; ins_po = 0; ins_so = 0;
    ins_src1 = 0; ins_src2 = 0; ins_bits = 0; ins_dest = 0; ins_data = '0;
    cfg_init_t = '0; cfg_l_q8 = '0; cfg_pf_threshold = '0; cfg_dram_more = 0;
    st_rd_en = 0; st_rd_addr = '0; l1_we = 0; l1_re = 0; l1_tile = '0; l1_row = '0; l1_wdata = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    build_graph();

    // normal cache mode: write and read back a row
    begin
      logic [RW-1:0] v;
      v = {4{$urandom}};
      @(negedge clk); l1_we = 1; l1_tile = LW'(L_ - 1); l1_row = RAW'(ROWS_ - 1); l1_wdata = v;
      @(negedge clk); l1_we = 0; l1_re = 1;
      @(negedge clk); l1_re = 0;
      ck(l1_rdata == v, "normal-mode L1 read");
      n_l1_normal++;
    end
    // DRAM write forwarding and an illegal instruction (XNORM in normal mode)
    ins(PO_FIST, SO_DRAM_WRITE, 77, 0, FW'(32'hCAFE));
    ck(dram_wr_addr == 32'd77 && dram_wr_data == FW'(32'hCAFE), "DRAM write forwarded");
    ins(PO_XNORM, 8'h00, 0, NS);
    set_mode(1'b1);
    n_mode_switch++;
    ck(mode_compute, "compute mode");

    // fill storage: tuples, then adjacency rows
    for (int i = 0; i < NS; i++) begin ins(PO_FIST, SO_DRAM_TO_STORAGE, i, 0, tuple_word(i)); n_fill++; end
    for (int j = 0; j < NS; j++) begin ins(PO_FIST, SO_DRAM_TO_STORAGE, NS + j, 0, adj_word(j)); n_fill++; end
    readback();
    for (int t = 0; t < NS; t++) ck(rb[t] == tuple_word(t)[TPW-1:0], "fill readback");

    for (int s = 0; s < SWEEPS + 2; s++) begin
      int nflip, exp_ann;
      bit anneal_all, arm_pf;
      anneal_all = (s == SWEEPS);
      arm_pf     = (s == SWEEPS + 1);
      cfg_init_t = anneal_all ? 16'hFFFF : '0;
      cfg_l_q8   = anneal_all ? 16'd512 : '0;   // l = 2.0
      cfg_dram_more = arm_pf;
      cfg_pf_threshold = 16'd2;
      // reference: Jacobi update from the current spins
      nflip = 0;
      for (int i = 0; i < NS; i++) begin
        int acc;
        acc = hv[i];
        for (int k = 0; k < N_; k++) if (nb[i][k] >= 0) acc += sp[nb[i][k]] ? jv[i][k] : -jv[i][k];
        expv[i] = (acc > 0) ^ anneal_all;
        nflip += (expv[i] != sp[i]);
      end
      exp_ann = anneal_flips + (anneal_all ? NS : 0);
      row0 = tuple_word(0)[RW-1:0];       // what the transfer puts in tile 0, row 0
      ins(PO_FIST, SO_STORAGE_TO_COMP, 0, NS);
      n_xfer++;
      t_start = cyc;
      ins(PO_XNORM, 8'h00, 0, NS);
      n_sweep++;
      if (stall_cycles != 0) n_stall++;
      ck(flips == 32'(nflip), "flip count");
      ck(anneal_flips == 32'(exp_ann), "annealing overrides");
      if (anneal_all) n_anneal += (anneal_flips != 0);
      for (int i = 0; i < NS; i++) sp[i] = expv[i];
      readback();
      for (int t = 0; t < NS; t++) begin
        ck(rb[t][RW + H_W] == sp[t], "own spin");
        for (int k = 0; k < N_; k++)
          if (nb[t][k] >= 0) begin
            ck(rb[t][k*(R_+1) + R_] == sp[nb[t][k]], "replica spin");
            ck(rb[t][k*(R_+1) +: R_] == R_'(jv[t][k]), "coupling untouched");
            if (s > 0) n_replica_upd++;
          end
        ck(rb[t][RW +: H_W] == H_W'(hv[t]), "field untouched");
      end
      // a sweep with nothing to update costs one cycle per row group plus the pipeline
      if (nflip == 0) ck(cyc - t_start < ROWS_ + 30, "sweep latency");
      ck(iter_num == PAR_W'(s + 2), "iterNum");
    end
    ck(dram_prefetch_count == 16'd1, "one prefetch per armed sweep");

    // back to normal mode: L1 row of tile 0 holds tuple 0's slots
    set_mode(1'b0);
    n_mode_switch++;
    @(negedge clk); l1_re = 1; l1_tile = '0; l1_row = '0;
    @(negedge clk); l1_re = 0;
    ck(l1_rdata == row0, "normal read after compute");
    n_l1_normal++;

    $display("mechanisms: mode_switch=%0d l1_normal=%0d dram_write=%0d illegal=%0d fill=%0d transfer=%0d sweep=%0d replica_checks=%0d stall_sweeps=%0d (stall cycles %0d) prefetch=%0d anneal=%0d spins_written=%0d",
             n_mode_switch, n_l1_normal, n_dram_wr, n_illegal, n_fill, n_xfer, n_sweep, n_replica_upd,
             n_stall, stall_cycles, n_prefetch, n_anneal, spins_written);
    ck(n_mode_switch > 0, "mechanism: mode switch");
    ck(n_l1_normal > 0,   "mechanism: normal-mode access");
    ck(n_dram_wr > 0,     "mechanism: DRAM write");
    ck(n_illegal > 0,     "mechanism: illegal instruction");
    ck(n_fill > 0,        "mechanism: DRAM to storage");
    ck(n_xfer > 0,        "mechanism: storage to compute");
    ck(n_sweep > 0,       "mechanism: XNORM sweep");
    ck(spins_written > 0, "mechanism: adjacency spin update");
    ck(n_stall > 0,       "mechanism: update-FIFO stall");
    ck(n_prefetch > 0,    "mechanism: DRAM prefetch");
    ck(n_anneal > 0,      "mechanism: annealing override");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
