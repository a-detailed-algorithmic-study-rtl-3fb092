// tb_compute_tile: self-checking test of the compute-tile SRAM model.
// Fills a small array with random rows and checks, against a copy kept in the
// testbench: normal reads (RWL on the true row only), in-memory XNOR with sigma_i=1
// (row) and sigma_i=0 (~row), the one-cycle row-buffer latency, that the buffer holds
// without re, and that a read of a row written in the same cycle returns the old data.
module tb_compute_tile;
  localparam int unsigned ROWS = 8;
  localparam int unsigned W    = 27;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         we, re, rwl_t, rwl_c;
  logic [2:0]   waddr, raddr;
  logic [W-1:0] wdata, rbuf;
  logic [W-1:0] model [ROWS];
  int checks = 0, failures = 0;

  compute_tile #(.ROWS(ROWS), .W(W)) dut (.*);

  task automatic check(input logic [W-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic rd(input int r, input logic t, input logic c);
    @(negedge clk);
    re = 1'b1; raddr = 3'(r); rwl_t = t; rwl_c = c;
    @(negedge clk);
    re = 1'b0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; rwl_t = 0; rwl_c = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1; waddr = 3'(r); wdata = W'($urandom); model[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int rep = 0; rep < 3; rep++)
      for (int r = 0; r < ROWS; r++) begin
        rd(r, 1'b1, 1'b0); check(rbuf, model[r], "normal read");
        rd(r, 1'b1, 1'b0 ^ 1'b1); check(rbuf, model[r] | ~model[r], "both RWL");
        rd(r, 1'b1, 1'b0); // sigma_i = +1
        check(rbuf, ~(model[r] ^ {W{1'b1}}), "XNOR sigma=1");
        rd(r, 1'b0, 1'b1); // sigma_i = -1
        check(rbuf, ~(model[r] ^ {W{1'b0}}), "XNOR sigma=0");
      end
    // latency: value is there exactly one edge after re
    @(negedge clk); re = 1; raddr = 3; rwl_t = 0; rwl_c = 1;
    @(posedge clk); #1 check(rbuf, ~model[3], "1-cycle latency");
    re = 0;
    repeat (3) @(posedge clk);
    #1 check(rbuf, ~model[3], "row buffer holds");
    // read during write of the same row returns the old row
    @(negedge clk); we = 1; waddr = 5; wdata = ~model[5];
    re = 1; raddr = 5; rwl_t = 1; rwl_c = 0;
    @(negedge clk); we = 0; re = 0;
    check(rbuf, model[5], "read-during-write old");
    model[5] = ~model[5];
    rd(5, 1'b1, 1'b0); check(rbuf, model[5], "new data after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
