// tb_spin_update_unit: a small configuration (4 lanes, 4 slots, 3-bit ICs, 16 tuples)
// with a random graph. The testbench models the storage array itself: it answers
// adjacency reads one cycle late and applies the masked tuple writes. After pushing
// the results of every row group (random changed lanes) and waiting for busy to
// fall, every tuple must equal the expectation built directly from the graph: own
// spin bits and every replica slot hold the new spin, nothing else changed. Also
// checks that almost_full stops the producer before the FIFO overflows, the number
// of spins written and the cost of 2 + degree cycles per changed spin.
module tb_spin_update_unit;
  localparam int unsigned L = 4, N = 4, R = 3, HW = 4, NT = 16, FD = 8;
  localparam int unsigned TW = 4, SW = 2, EW = 1 + TW + SW, RW = N * (R + 1), TPW = RW + HW + 1;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, push_valid, almost_full, st_we, adj_re, busy;
  logic [TW-1:0] push_base, st_waddr, adj_addr;
  logic [L-1:0] push_lane_valid, push_sigma;
  logic [TPW-1:0] st_wmask, st_wdata;
  logic [N*EW-1:0] adj_rdata;
  logic [31:0] spins_written;
  int checks = 0, failures = 0;

  spin_update_unit #(.L(L), .N(N), .R(R), .HW(HW), .NT(NT), .FD(FD)) dut (.*);

  logic [TPW-1:0]  tup [NT], exp_tup [NT];
  logic [N*EW-1:0] adj [NT];
  int deg [NT];

  always_ff @(posedge clk) begin
    if (adj_re) adj_rdata <= adj[adj_addr];
    if (st_we) tup[st_waddr] <= (tup[st_waddr] & ~st_wmask) | (st_wdata & st_wmask);
  end

  initial begin
    #3000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nchanged = 0, work = 0, t0, t1;
    // random graph: each tuple t lists up to N neighbours in its slots; the adjacency
    // row of spin j lists every (t, slot) where j appears
    for (int t = 0; t < NT; t++) begin
      tup[t] = {$urandom, $urandom};
      adj[t] = '0;
      deg[t] = 0;
    end
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < N; k++) begin
        int j;
        j = $urandom_range(0, NT - 1);
        if (j != t && deg[j] < N && $urandom_range(0, 3) != 0) begin
          adj[j][deg[j]*EW +: EW] = {1'b1, TW'(t), SW'(k)};
          deg[j]++;
        end
      end
    for (int t = 0; t < NT; t++) exp_tup[t] = tup[t];
    rst_n = 0; push_valid = 0; push_base = 0; push_lane_valid = 0; push_sigma = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // results of all NT/L row groups, back to back, honouring almost_full
    t0 = $time;
    for (int g = 0; g < NT / L; g++) begin
      @(negedge clk);
      while (almost_full) @(negedge clk);
      push_valid = 1; push_base = TW'(g * L);
      push_lane_valid = L'($urandom); push_sigma = L'($urandom);
      if (g == 0) push_lane_valid = '1;
      for (int i = 0; i < L; i++)
        if (push_lane_valid[i]) begin
          int s;
          s = g * L + i;
          nchanged++;
          work += 2 + deg[s];
          exp_tup[s][RW + HW] = push_sigma[i];
          for (int e = 0; e < deg[s]; e++) begin
            logic [EW-1:0] en;
            en = adj[s][e*EW +: EW];
            exp_tup[en[SW +: TW]][32'(en[SW-1:0]) * (R + 1) + R] = push_sigma[i];
          end
        end
      @(negedge clk); push_valid = 0;
    end
    // burst without pauses: the FIFO must signal almost_full in time
    @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("FAIL busy"); end
    while (busy) @(negedge clk);
    t1 = $time;
    for (int t = 0; t < NT; t++) begin
      checks++;
      if (tup[t] !== exp_tup[t]) begin
        failures++;
        $display("FAIL tuple %0d got %h exp %h", t, tup[t], exp_tup[t]);
      end
    end
    checks++;
    if (spins_written != 32'(nchanged)) begin failures++; $display("FAIL count %0d %0d", spins_written, nchanged); end
    // walk cost: 2 + degree per changed spin plus two cycles per FIFO entry
    checks++;
    if ((t1 - t0) / 10 > work + 4 * (NT / L) + 6) begin
      failures++;
      $display("FAIL cycles %0d > %0d", (t1 - t0) / 10, work + 4 * (NT / L) + 6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
