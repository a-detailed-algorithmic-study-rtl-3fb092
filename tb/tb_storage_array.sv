// tb_storage_array: random traffic on both read ports and the masked write port of a
// small storage array, checked against a model array; also the one-cycle read latency,
// the hold of read data without re and read-during-write returning the old row.
module tb_storage_array;
  localparam int unsigned DEPTH = 12;
  localparam int unsigned W     = 40;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic re_a, re_b, we;
  logic [3:0] addr_a, addr_b, waddr;
  logic [W-1:0] rdata_a, rdata_b, wmask, wdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  storage_array #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_a, exp_b;
    logic va, vb;
    re_a = 0; re_b = 0; we = 0; addr_a = 0; addr_b = 0; waddr = 0; wmask = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 4'(i); wmask = '1; wdata = W'({$urandom, $urandom});
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      re_a = 1'($urandom) | (t == 0); re_b = 1'($urandom) | (t == 0); we = 1'($urandom);
      addr_a = 4'($urandom_range(0, DEPTH-1)); addr_b = 4'($urandom_range(0, DEPTH-1));
      waddr = 4'($urandom_range(0, DEPTH-1));
      wmask = W'({$urandom, $urandom}); wdata = W'({$urandom, $urandom});
      if (t % 7 == 0) wmask = W'(1) << $urandom_range(0, W-1);   // single-bit spin write
      va = re_a; vb = re_b;
      if (re_a) exp_a = model[addr_a];       // old data even if written now
      if (re_b) exp_b = model[addr_b];
      if (we) model[waddr] = (model[waddr] & ~wmask) | (wdata & wmask);
      @(posedge clk); #1;
      checks += 2;
      if (rdata_a !== exp_a) begin failures++; $display("FAIL port A t=%0d", t); end
      if (rdata_b !== exp_b) begin failures++; $display("FAIL port B t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
