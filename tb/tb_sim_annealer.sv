// tb_sim_annealer: checks the comparator and the Metropolis decision.
// Greedy spin: +1 exactly when -H_sigma > 0. For the annealed spin the testbench
// computes the exact likelihood exp(-dH*iterNum/initT) in real arithmetic and expects
// "keep the greedy spin" when l is below it; cases where l lies within 5% of the exact
// likelihood are not judged (the block approximates exp to about 4.4%), but the
// reported likelihood itself is checked to lie within that 5% (or be saturated).
// initT = 0 must always keep the greedy spin.
module tb_sim_annealer;
  import sachi_pkg::*;
  int checks = 0, failures = 0, judged_rej = 0, judged_acc = 0;
  logic signed [ACC_W-1:0] sum;
  logic sigma_cur, sigma_upd, accept, sigma_new;
  logic [PAR_W-1:0] iter_num, init_t;
  logic [15:0] l_q8, likelihood;
  sim_annealer dut (.*);

  task automatic ck(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s sum=%0d cur=%0d it=%0d T0=%0d l=%0d lik=%0d", what, sum, sigma_cur,
               iter_num, init_t, l_q8, likelihood);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int s, u, c, dh;
      real lik, lr;
      s         = int'($urandom_range(0, 80)) - 40;
      sigma_cur = 1'($urandom);
      iter_num  = PAR_W'($urandom_range(0, 20));
      init_t    = (t % 10 == 0) ? '0 : PAR_W'($urandom_range(1, 200));
      l_q8      = 16'($urandom_range(0, 3 * 256));
      sum       = ACC_W'(s);
      #1;
      u  = (s > 0) ? 1 : -1;
      c  = sigma_cur ? 1 : -1;
      dh = -(u - c) * s;            // H(updS) - H(currS), H(x) = -x*sum
      ck(sigma_upd == (s > 0), "greedy");
      if (init_t == 0) begin
        ck(sigma_new == sigma_upd, "annealing off");
        continue;
      end
      lik = $exp(-real'(dh) * real'(iter_num) / real'(init_t));
      lr  = real'(l_q8) / 256.0;
      if (lik < 255.0 && lik > 0.01)
        ck(real'(likelihood) / 256.0 > lik * 0.95 - 0.005 &&
           real'(likelihood) / 256.0 < lik * 1.05 + 0.005, "likelihood value");
      if (lr < lik * 0.95 - 0.005) begin
        ck(sigma_new == sigma_upd && accept, "accept");
        judged_acc++;
      end else if (lr > lik * 1.05 + 0.005) begin
        ck(sigma_new == !sigma_upd && !accept, "reject");
        judged_rej++;
      end
    end
    ck(judged_acc > 100 && judged_rej > 100, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
