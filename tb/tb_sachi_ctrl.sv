// tb_sachi_ctrl: the sequencer with 2 tiles of 4 rows (8 tuples), 2 slots, 3-bit ICs.
// The testbench stands in for the storage array (one-cycle reads of a known pattern),
// the tiles (each activation answered 4 cycles later, lanes flipping by a known
// rule) and the spin-update unit (almost_full and busy driven from the testbench).
// Checks: DRAM write and fill commands, the tuple-to-tile/row placement of a
// transfer, the rows and lane masks of an XNORM sweep over a range that starts and
// ends inside a row group, the pushed results, stalling while almost_full, waiting
// for the update unit before done, iter_num, the flip count and the marking of the
// result lanes that belong to the swept range.
module tb_sachi_ctrl;
  import sachi_pkg::*;
  localparam int unsigned L = 2, ROWS = 4, N = 2, R = 3, HW = 16;
  localparam int unsigned NT = L * ROWS, TW = 3, RAW = 2, RW = N * (R + 1), TPW = RW + HW + 1;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, cmd_valid, busy, done, dram_wr, fill_tuple_we, fill_adj_we, st_re, tile_wsigma, act;
  logic upd_push, upd_almost_full, upd_busy, pf_load, pf_step;
  sachi_cmd_t cmd;
  logic [4:0] done_dest;
  logic [31:0] flips, stall_cycles;
  logic [15:0] iter_num, pf_rows;
  logic [TW-1:0] fill_addr, st_raddr, upd_base;
  logic [TPW-1:0] st_rdata;
  logic [L-1:0] tile_we, res_valid, res_sigma_old, res_sigma_new, res_in_range, upd_lane_valid, upd_sigma;
  logic [RAW-1:0] tile_waddr, arow;
  logic [RW-1:0] tile_wrow;
  logic [HW-1:0] tile_wh;
  int checks = 0, failures = 0;

  sachi_ctrl #(.L(L), .ROWS(ROWS), .N(N), .R(R), .HW(HW)) dut (.*);

  task automatic ck(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [TPW-1:0] pattern(int t);
    return TPW'(32'h9E37_79B9 * (t + 1));
  endfunction

  // storage stand-in
  always_ff @(posedge clk) if (st_re) st_rdata <= pattern(int'(st_raddr));

  // tile stand-in: row r of tile g holds tuple r*L+g; its spin flips when tuple is odd
  logic [PIPE_D-1:0] pv;
  localparam int PIPE_D = 4;
  logic [RAW-1:0] prow [PIPE_D];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv <= '0;
    else pv <= {pv[PIPE_D-2:0], act};
  end
  always_ff @(posedge clk) begin
    prow[0] <= arow;
    for (int i = 1; i < PIPE_D; i++) prow[i] <= prow[i-1];
  end
  always_comb begin
    res_valid = {L{pv[PIPE_D-1]}};
    res_sigma_old = '0;
    for (int g = 0; g < L; g++) res_sigma_new[g] = (g % 2 == 1);
  end

  // observed traffic
  int tile_writes = 0, acts = 0, pushes = 0;
  logic [TPW-1:0] placed [L][ROWS];
  int push_base_q [$];
  logic [L-1:0] push_lanes_q [$];
  logic [L-1:0] in_range_q [$];
  always @(posedge clk) begin
    for (int g = 0; g < L; g++) if (tile_we[g]) begin
      placed[g][tile_waddr] = {tile_wsigma, tile_wh, tile_wrow};
      tile_writes++;
    end
    if (act) acts++;
    if (res_valid != '0) in_range_q.push_back(res_in_range);
    if (upd_push) begin
      pushes++;
      push_base_q.push_back(int'(upd_base));
      push_lanes_q.push_back(upd_lane_valid);
    end
  end

  task automatic run(input sachi_op_e op, input int s1, s2, input int d);
    @(negedge clk);
    cmd_valid = 1; cmd = '{op: op, src1: 32'(s1), src2: 32'(s2), bits: 6'd3, dest: 5'(d)};
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    ck(done_dest == 5'(d), "done dest");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0; upd_almost_full = 0; upd_busy = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    ck(iter_num == 16'd1, "iter_num reset");
    // DRAM write forwarding
    fork
      run(OP_DRAM_WRITE, 5, 0, 3);
      begin int seen = 0; repeat (4) begin @(posedge clk); #1 seen += dram_wr; end ck(seen == 1, "dram_wr pulse"); end
    join
    // fill to tuple and to adjacency region
    fork
      run(OP_DRAM_TO_STORAGE, 6, 0, 4);
      begin int st = 0, sa = 0; repeat (4) begin @(posedge clk); #1 if (fill_tuple_we) begin st++; ck(fill_addr == 3'd6, "fill addr"); end sa += fill_adj_we; end ck(st == 1 && sa == 0, "tuple fill"); end
    join
    fork
      run(OP_DRAM_TO_STORAGE, NT + 2, 0, 4);
      begin int st = 0, sa = 0; repeat (4) begin @(posedge clk); #1 if (fill_adj_we) begin sa++; ck(fill_addr == 3'd2, "adj addr"); end st += fill_tuple_we; end ck(st == 0 && sa == 1, "adjacency fill"); end
    join
    // transfer of all tuples
    run(OP_STORAGE_TO_COMP, 0, NT, 7);
    ck(tile_writes == NT, "transfer count");
    for (int t = 0; t < NT; t++)
      ck(placed[t % L][t / L] == pattern(t), "tuple placement");
    // sweep over tuples 1..6: row groups 0..3, lanes masked at both ends
    fork
      run(OP_XNORM, 1, 6, 9);
      begin
        repeat (3) @(negedge clk);
        upd_almost_full = 1;            // stall the sweep for 5 cycles
        repeat (5) @(negedge clk);
        upd_almost_full = 0;
        upd_busy = 1;                   // update unit still working after the sweep
        repeat (20) @(negedge clk);
        upd_busy = 0;
      end
    join
    ck(acts == 4, "rows activated");
    ck(stall_cycles >= 5, "stall counted");
    ck(iter_num == 16'd2, "iter_num after sweep");
    // expected pushes: lanes flip only on odd lane; tuples in 1..6
    ck(pushes == 3, "pushes");
    // result lanes inside the swept range, per row group: {1}, {2,3}, {4,5}, {6}
    ck(in_range_q.size() == 4, "result row groups");
    if (in_range_q.size() == 4)
      ck(in_range_q[0] == 2'b10 && in_range_q[1] == 2'b11 && in_range_q[2] == 2'b11 &&
         in_range_q[3] == 2'b01, "result lanes in range");
    for (int p = 0; p < pushes; p++) begin
      ck(push_base_q[p] == 2 * p, "push base");
      ck(push_lanes_q[p] == 2'b10, "push lanes");
    end
    ck(flips == 32'd3, "flip count");
    ck(pf_rows == 16'd4, "prefetch rows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
