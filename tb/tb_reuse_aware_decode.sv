// tb_reuse_aware_decode: checks phase 2 against plain integer arithmetic.
// For random signed J_ij, sigma_j and sigma_i the testbench builds the row the compute
// array would sense (stored slot XNOR sigma_i) and expects J_ij*sigma_j for every
// slot, including J = -2^(R-1). Also checks the mixed-encoding table values: 9-bit
// J = 135 / -135 and 3-bit J = 3 / -3 times sigma_j = +1 / -1.
module tb_reuse_aware_decode;
  int checks = 0, failures = 0;

  localparam int unsigned N = 5;
  localparam int unsigned R = 8;
  logic                   sigma_i;
  logic [N*(R+1)-1:0]     xrow;
  logic signed [R:0]      prod [N];
  reuse_aware_decode #(.N(N), .R(R)) dut (.*);

  // 9-bit and 3-bit single-slot instances for the table values
  logic              s9, s3;
  logic [9:0]        x9;
  logic [3:0]        x3;
  logic signed [9:0] p9 [1];
  logic signed [3:0] p3 [1];
  reuse_aware_decode #(.N(1), .R(9)) d9 (.sigma_i(s9), .xrow(x9), .prod(p9));
  reuse_aware_decode #(.N(1), .R(3)) d3 (.sigma_i(s3), .xrow(x3), .prod(p3));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int j [N];
    logic sj [N];
    for (int t = 0; t < 400; t++) begin
      sigma_i = 1'($urandom);
      for (int k = 0; k < N; k++) begin
        j[k]  = (t < 4) ? ((k == 0) ? -128 : 127) : int'($urandom_range(0, 255)) - 128;
        sj[k] = 1'($urandom);
        // stored slot {sigma_j, J}, sensed as XNOR with sigma_i
        xrow[k*(R+1) +: R+1] = ~({sj[k], 8'(j[k])} ^ {(R+1){sigma_i}});
      end
      #1;
      for (int k = 0; k < N; k++) begin
        int exp;
        exp = sj[k] ? j[k] : -j[k];
        checks++;
        if (int'(prod[k]) != exp) begin
          failures++;
          $display("FAIL J=%0d sj=%0d si=%0d got %0d", j[k], sj[k], sigma_i, prod[k]);
        end
      end
    end
    // mixed-encoding table: sigma_i = sigma_j (same-spin case), spin code 0 = -1, 1 = +1
    begin
      logic [8:0] jv9 [2];
      logic [2:0] jv3 [2];
      int e9 [2][2], e3 [2][2];
      jv9 = '{9'h087, 9'h179};
      jv3 = '{3'h3, 3'h5};
      // expected products from the table: spin 0 -> 179/087, spin 1 -> 087/179
      e9 = '{'{-135, 135}, '{135, -135}};
      e3 = '{'{-3, 3}, '{3, -3}};
      for (int s = 0; s < 2; s++)
        for (int v = 0; v < 2; v++) begin
          s9 = 1'(s); s3 = 1'(s);
          x9 = ~({1'(s), jv9[v]} ^ {10{1'(s)}});
          x3 = ~({1'(s), jv3[v]} ^ {4{1'(s)}});
          #1;
          checks += 2;
          if (int'(p9[0]) != e9[s][v]) begin failures++; $display("FAIL table R=9 s=%0d v=%0d got %0d", s, v, p9[0]); end
          if (int'(p3[0]) != e3[s][v]) begin failures++; $display("FAIL table R=3 s=%0d v=%0d got %0d", s, v, p3[0]); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
