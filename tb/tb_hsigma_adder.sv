// tb_hsigma_adder: random products and external fields at the default sizes (44
// slots of 9-bit products, 16-bit h, 24-bit sum) and at extreme values; the
// expectation is an integer sum in the testbench.
module tb_hsigma_adder;
  import sachi_pkg::*;
  int checks = 0, failures = 0;
  logic signed [H_W-1:0]   h;
  logic signed [IC_BITS:0] prod [NBR];
  logic signed [ACC_W-1:0] sum;
  hsigma_adder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int exp;
      h   = H_W'($urandom);
      if (t == 0) h = -16'sd32768;
      if (t == 1) h = 16'sd32767;
      exp = int'(h);
      for (int k = 0; k < NBR; k++) begin
        int p;
        p = int'($urandom_range(0, 511)) - 256;
        if (t == 0) p = -256;
        if (t == 1) p = 255;
        prod[k] = (IC_BITS+1)'(p);
        exp += p;
      end
      #1;
      checks++;
      if (int'(sum) != exp) begin
        failures++;
        $display("FAIL t=%0d got %0d exp %0d", t, sum, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
