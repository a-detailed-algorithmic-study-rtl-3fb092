// tb_sachi_tile: one compute tile with its near-L1 pipeline (8 rows, 5 slots, 8-bit
// ICs). Random tuples are loaded; each is activated in compute mode and the result is
// checked against an integer model: -H_sigma = h_i + sum J_ij*sigma_j, greedy spin +1
// iff that is > 0. Checks the 4-cycle latency and one result per cycle for
// back-to-back activations, the annealing override (l = 2.0 > likelihood 1 when the
// spin is already greedy flips it), that act is ignored in normal mode and that a
// normal read returns the stored row unchanged.
module tb_sachi_tile;
  localparam int unsigned ROWS = 8, N = 5, R = 8, HW = 16;
  localparam int unsigned W = N * (R + 1);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, mode_compute, we, wsigma, act, nre, out_valid, out_sigma_old, out_sigma_new, out_anneal_flip;
  logic [2:0] waddr, arow, nrow, out_row;
  logic [W-1:0] wrow, ndata;
  logic signed [HW-1:0] wh;
  logic [15:0] iter_num, init_t, l_q8;
  int checks = 0, failures = 0;

  sachi_tile #(.ROWS(ROWS), .N(N), .R(R), .HW(HW)) dut (.*);

  logic [W-1:0] m_row [ROWS];
  logic         m_sig [ROWS];
  int           m_h   [ROWS];

  function automatic bit greedy(int r);
    int s;
    s = m_h[r];
    for (int k = 0; k < N; k++) begin
      int j;
      j = int'($signed(m_row[r][k*(R+1) +: R]));
      s += m_row[r][k*(R+1) + R] ? j : -j;
    end
    return s > 0;
  endfunction

  task automatic ck(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor
  int exp_q [$];
  bit exp_flip = 0;
  int lat_issue [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (out_valid) begin
    int r, c0;
    r  = exp_q.pop_front();
    c0 = lat_issue.pop_front();
    ck(out_row == 3'(r), "row");
    ck(cyc - c0 == 4, "latency 4 cycles");
    ck(out_sigma_old == m_sig[r], "old spin");
    ck(out_sigma_new == (greedy(r) ^ exp_flip), "new spin");
    ck(out_anneal_flip == exp_flip, "anneal flag");
  end

  task automatic load_all();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1; waddr = 3'(r);
      wrow = {$urandom, $urandom};
      if (r == 0) wrow = '0;                           // J = 0 everywhere, h decides
      wsigma = 1'($urandom); wh = HW'($urandom_range(0, 400)) - 16'sd200;
      m_row[r] = wrow; m_sig[r] = wsigma; m_h[r] = int'(wh);
    end
    @(negedge clk); we = 0;
  endtask

  initial begin
    rst_n = 0; mode_compute = 0; we = 0; wsigma = 0; act = 0; nre = 0;
    waddr = 0; arow = 0; nrow = 0; wrow = 0; wh = 0;
    iter_num = 1; init_t = 0; l_q8 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    load_all();
    // normal mode: act ignored, raw read
    @(negedge clk); act = 1; arow = 2;
    @(negedge clk); act = 0;
    repeat (6) @(negedge clk);
    ck(exp_q.size() == 0, "no result in normal mode");
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); nre = 1; nrow = 3'(r);
      @(negedge clk); nre = 0;
      ck(ndata == m_row[r], "normal read");
    end
    mode_compute = 1;
    for (int rep = 0; rep < 20; rep++) begin
      if (rep > 0) load_all();
      exp_flip = (rep == 19);
      if (exp_flip) begin
        // make every spin already greedy so dH = 0, likelihood = 1.0 < l = 2.0
        for (int r = 0; r < ROWS; r++) m_sig[r] = greedy(r);
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk); we = 1; waddr = 3'(r); wrow = m_row[r]; wsigma = m_sig[r]; wh = HW'(m_h[r]);
        end
        @(negedge clk); we = 0;
        init_t = 16'd10; l_q8 = 16'd512;
      end
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        act = 1; arow = 3'(r);
        exp_q.push_back(r);
        lat_issue.push_back(cyc);
      end
      @(negedge clk); act = 0;
      repeat (6) @(negedge clk);
      ck(exp_q.size() == 0, "all results returned");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
