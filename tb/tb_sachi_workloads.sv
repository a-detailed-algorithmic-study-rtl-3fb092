// tb_sachi_workloads: the machine at its default size (16 tiles x 100 rows, 44 slots,
// 8-bit coefficient storage) running the problem shapes it can hold:
//   1. asset allocation (number partitioning): 1000 spins on a sparse random graph,
//      1 to 12 neighbours per spin, 4-bit couplings, with simulated annealing on
//   2. molecular dynamics: 500 atoms on a 25 x 20 King's graph, 2-bit couplings
//   3. molecular dynamics: 1000 atoms on a 40 x 25 King's graph, 4-bit couplings
// Couplings of fewer than 8 bits are stored sign-extended and XNORM is issued with the
// workload's resolution. Only tuples 0..n-1 of the 1600 are filled, transferred and
// swept. After every sweep the storage array is read back and compared with an
// integer model of the update: greedy spin +1 iff h_i + sum J_ij*sigma_j > 0, then,
// with annealing on, the spin is kept if l < exp(-dH*iterNum/initT) and inverted
// otherwise (dH from the local energy -s*(h_i + sum J_ij*sigma_j)). Where l lies
// within 6% of that likelihood the machine's own choice is taken as the reference,
// because its exponential is approximate; everywhere else the outcome is fixed.
// Every replica of every spin, every coupling and field, the flip count and the
// count of annealer overrides are checked.
module tb_sachi_workloads;
  import sachi_pkg::*;
  localparam int unsigned NS  = NUM_TUPLES;
  localparam int unsigned N_  = NBR;
  localparam int unsigned R_  = IC_BITS;
  localparam int unsigned TW  = $clog2(NS);
  localparam int unsigned RAW = $clog2(TILE_ROWS);
  localparam int unsigned LW  = $clog2(NUM_TILES);
  localparam int unsigned SW  = $clog2(N_);
  localparam int unsigned EW  = 1 + TW + SW;
  localparam int unsigned RW  = N_ * (R_ + 1);
  localparam int unsigned TPW = RW + H_W + 1;
  localparam int unsigned AJW = N_ * EW;
  localparam int unsigned FW  = (AJW > TPW) ? AJW : TPW;
  localparam int unsigned WATCHDOG_CYCLES = 3_000_000;

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
  int n;                  // spins of the current workload
  int nb   [NS][N_];      // neighbour spin per slot, -1 = empty
  int jv   [NS][N_];
  int hv   [NS];
  bit sp   [NS];
  int ndeg [NS];
  int adj_t [NS][N_];     // places holding a copy of spin j: tuple and slot
  int adj_k [NS][N_];
  int nadj [NS];

  function automatic int rand_j(int bits);
    return int'($urandom_range(0, (1 << bits) - 1)) - (1 << (bits - 1));
  endfunction

  task automatic clear_graph();
    for (int i = 0; i < NS; i++) begin
      ndeg[i] = 0; nadj[i] = 0;
      for (int k = 0; k < N_; k++) begin nb[i][k] = -1; jv[i][k] = 0; end
      hv[i] = 0; sp[i] = 0;
    end
  endtask

  // edge a-b with coupling j, stored in both tuples (tuple replication)
  function automatic void add_edge(int a, int b, int j);
    nb[a][ndeg[a]] = b; jv[a][ndeg[a]] = j;
    adj_t[b][nadj[b]] = a; adj_k[b][nadj[b]] = ndeg[a]; nadj[b]++; ndeg[a]++;
    nb[b][ndeg[b]] = a; jv[b][ndeg[b]] = j;
    adj_t[a][nadj[a]] = b; adj_k[a][nadj[a]] = ndeg[b]; nadj[a]++; ndeg[b]++;
  endfunction

  function automatic bit connected(int a, int b);
    for (int k = 0; k < ndeg[a]; k++) if (nb[a][k] == b) return 1'b1;
    return 1'b0;
  endfunction

  task automatic build_sparse(int nspins, int bits, int edges, int maxdeg);
    int made;
    clear_graph();
    n = nspins; made = 0;
    // a ring first, so every spin has a neighbour, then random chords
    for (int i = 0; i < n; i++) begin add_edge(i, (i + 1) % n, rand_j(bits)); made++; end
    while (made < edges) begin
      int a, b;
      a = $urandom_range(0, n - 1); b = $urandom_range(0, n - 1);
      if (a != b && ndeg[a] < maxdeg && ndeg[b] < maxdeg && !connected(a, b)) begin
        add_edge(a, b, rand_j(bits)); made++;
      end
    end
    for (int i = 0; i < n; i++) begin
      hv[i] = int'($urandom_range(0, 8)) - 4; sp[i] = 1'($urandom);
    end
  endtask

  task automatic build_kings(int gw, int gh, int bits);
    clear_graph();
    n = gw * gh;
    for (int i = 0; i < n; i++) begin
      int x, y;
      x = i % gw; y = i / gw;
      // each edge once: right, down-left, down, down-right
      if (x + 1 < gw)                add_edge(i, i + 1, rand_j(bits));
      if (y + 1 < gh && x > 0)       add_edge(i, i + gw - 1, rand_j(bits));
      if (y + 1 < gh)                add_edge(i, i + gw, rand_j(bits));
      if (y + 1 < gh && x + 1 < gw)  add_edge(i, i + gw + 1, rand_j(bits));
    end
    for (int i = 0; i < n; i++) begin
      hv[i] = int'($urandom_range(0, 6)) - 3; sp[i] = 1'($urandom);
    end
  endtask

  function automatic logic [FW-1:0] tuple_word(int i);
    logic [TPW-1:0] w;
    w = '0;
    for (int k = 0; k < ndeg[i]; k++) w[k*(R_+1) +: R_+1] = {sp[nb[i][k]], R_'(jv[i][k])};
    w[RW +: H_W] = H_W'(hv[i]);
    w[RW + H_W]  = sp[i];
    return FW'(w);
  endfunction

  function automatic logic [FW-1:0] adj_word(int j);
    logic [AJW-1:0] w;
    w = '0;
    for (int e = 0; e < nadj[j]; e++) w[e*EW +: EW] = {1'b1, TW'(adj_t[j][e]), SW'(adj_k[j][e])};
    return FW'(w);
  endfunction

  // ---------------- host actions ----------------
  task automatic ins(input logic [7:0] po, so, input int s1, s2, input int bits,
                     input logic [FW-1:0] d = '0);
    @(negedge clk);
    while (!ins_ready) @(negedge clk);
    ins_valid = 1; ins_po = po; ins_so = so; ins_src1 = 32'(s1); ins_src2 = 32'(s2);
    ins_bits = 6'(bits); ins_dest = 5'(s1); ins_data = d;
    @(negedge clk);
    ins_valid = 0;
    while (!done) @(negedge clk);
  endtask

  logic [TPW-1:0] rb [NS];
  task automatic readback();
    for (int t = 0; t < n; t++) begin
      @(negedge clk); st_rd_en = 1; st_rd_addr = (TW+1)'(t);
      @(negedge clk); st_rd_en = 0;
      rb[t] = st_rd_data[TPW-1:0];
    end
  endtask

  int n_sweeps = 0, n_ambiguous = 0, n_overrides = 0, n_flips = 0;

  // one workload: fill, then sweeps (transfer + XNORM) checked against the model
  task automatic run(string name, int bits, int sweeps, int init_t);
    int t0;
    t0 = cyc;
    for (int i = 0; i < n; i++) ins(PO_FIST, SO_DRAM_TO_STORAGE, i, 0, bits, tuple_word(i));
    for (int j = 0; j < n; j++) ins(PO_FIST, SO_DRAM_TO_STORAGE, NS + j, 0, bits, adj_word(j));
    for (int s = 0; s < sweeps; s++) begin
      bit upd [NS];
      bit fixed [NS];
      bit greedy [NS];
      int ann0, nflip, nover;
      cfg_init_t = PAR_W'(init_t);
      cfg_l_q8   = 16'($urandom_range(0, 320));
      for (int i = 0; i < n; i++) begin
        int acc;
        real dh, lik, l;
        acc = hv[i];
        for (int k = 0; k < ndeg[i]; k++) acc += sp[nb[i][k]] ? jv[i][k] : -jv[i][k];
        upd[i] = (acc > 0);
        greedy[i] = upd[i];
        fixed[i] = 1'b1;
        if (init_t != 0) begin
          dh  = -real'((upd[i] ? 1 : -1) - (sp[i] ? 1 : -1)) * real'(acc);
          lik = $exp(-dh * real'(iter_num) / real'(init_t));
          if (lik > 255.99) lik = 255.99;
          l = real'(cfg_l_q8) / 256.0;
          if (l >= lik * 0.94 && l <= lik * 1.06 + 1.0 / 256.0) fixed[i] = 1'b0;
          else if (!(l < lik)) upd[i] = ~upd[i];
        end
      end
      ann0 = anneal_flips;
      ins(PO_FIST, SO_STORAGE_TO_COMP, 0, n, bits);
      ins(PO_XNORM, 8'h00, 0, n, bits);
      n_sweeps++;
      readback();
      nflip = 0; nover = 0;
      for (int i = 0; i < n; i++) begin
        bit got;
        got = rb[i][RW + H_W];
        if (fixed[i]) ck(got == upd[i], {name, ": spin"});
        else n_ambiguous++;
        nflip += (got != sp[i]);
        nover += (got != greedy[i]);
        sp[i] = got;
      end
      ck(flips == 32'(nflip), {name, ": flip count"});
      n_flips += nflip;
      ck(anneal_flips - ann0 == 32'(nover), {name, ": annealer overrides"});
      n_overrides += nover;
      for (int t = 0; t < n; t++) begin
        for (int k = 0; k < N_; k++)
          if (k < ndeg[t]) begin
            ck(rb[t][k*(R_+1) + R_] == sp[nb[t][k]], {name, ": replica spin"});
            ck(rb[t][k*(R_+1) +: R_] == R_'(jv[t][k]), {name, ": coupling"});
          end else
            ck(rb[t][k*(R_+1) +: R_+1] == '0, {name, ": empty slot"});
        ck(rb[t][RW +: H_W] == H_W'(hv[t]), {name, ": field"});
      end
    end
    $display("%s: %0d spins, %0d-bit couplings, %0d sweeps, %0d cycles", name, n, bits, sweeps, cyc - t0);
  endtask

  initial begin
    rst_n = 0; spr_we = 0; spr_mode = 0; ins_valid = 0; ins_po = 0; ins_so = 0;
    ins_src1 = 0; ins_src2 = 0; ins_bits = 0; ins_dest = 0; ins_data = '0;
    cfg_init_t = '0; cfg_l_q8 = '0; cfg_pf_threshold = '0; cfg_dram_more = 0;
    st_rd_en = 0; st_rd_addr = '0; l1_we = 0; l1_re = 0; l1_tile = '0; l1_row = '0; l1_wdata = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); spr_we = 1; spr_mode = 1'b1;
    @(negedge clk); spr_we = 0;

    build_sparse(1000, 4, 3000, 12);
    run("asset allocation", 4, 4, 40);
    build_kings(25, 20, 2);
    run("molecular dynamics 500", 2, 3, 0);
    build_kings(40, 25, 4);
    run("molecular dynamics 1K", 4, 3, 0);

    $display("sweeps=%0d flips=%0d annealer overrides=%0d near-threshold decisions=%0d",
             n_sweeps, n_flips, n_overrides, n_ambiguous);
    ck(n_overrides > 0, "annealer overrode some spins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
