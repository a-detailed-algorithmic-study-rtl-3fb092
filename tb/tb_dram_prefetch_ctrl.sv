// tb_dram_prefetch_ctrl: rounds of random length and threshold; the testbench counts
// rows itself and expects exactly one prefetch_req, in the cycle after the step that
// leaves `threshold` rows, when more data is pending, and none otherwise; a round
// shorter than the threshold requests at load.
module tb_dram_prefetch_ctrl;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, load, row_step, more_pending, prefetch_req;
  logic [15:0] rows, threshold, remaining, req_count;
  int checks = 0, failures = 0, exp_reqs = 0;
  dram_prefetch_ctrl #(.CW(16)) dut (.*);

  task automatic ck(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; load = 0; row_step = 0; more_pending = 0; rows = 0; threshold = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rnd = 0; rnd < 60; rnd++) begin
      int n, th, left, seen, exp_at;
      n  = $urandom_range(1, 40);
      th = $urandom_range(0, 45);
      more_pending = (rnd % 4 != 3);
      @(negedge clk);
      load = 1; rows = 16'(n); threshold = 16'(th);
      @(negedge clk);
      load = 0;
      seen = prefetch_req;
      exp_at = (more_pending && n <= th) ? 1 : 0;
      if (exp_at) ck(prefetch_req == 1'b1, "request at load");
      left = n;
      while (left > 0) begin
        row_step = ($urandom_range(0, 3) != 0);
        @(negedge clk);
        if (row_step) begin
          left--;
          ck(remaining == 16'(left), "remaining count");
          if (more_pending && !exp_at && left == th)
            ck(prefetch_req == 1'b1, "request at threshold");
          else
            ck(prefetch_req == 1'b0, "no request");
        end else ck(prefetch_req == 1'b0, "no request while idle");
        seen += prefetch_req;
        row_step = 0;
      end
      ck(seen == ((more_pending && th < n) || exp_at ? 1 : 0), "one request per round");
      exp_reqs += ((more_pending && th < n) || exp_at) ? 1 : 0;
    end
    ck(req_count == 16'(exp_reqs), "request count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
