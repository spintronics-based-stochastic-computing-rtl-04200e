`timescale 1ns/100ps
// tb_mtj_model: checks the stochastic MTJ model.
// A reset pulse must always leave the junction AP; a write pulse with
// probability code 0 must never switch it and with PROB_ONE must always
// switch it; for intermediate codes the fraction of switching write pulses
// over N_TRIALS must lie within 4 standard deviations of the code's
// probability. A second device with another seed must not produce the same
// sequence of outcomes (the seeds decorrelate devices), and the AND of two
// devices at p = 0.5 must be near 0.25.
module tb_mtj_model;
  import bis_pkg::*;

  localparam int N_TRIALS = 2000;

  logic  clk = 1'b0;
  logic  i_reset, i_write;
  prob_t p_sw;
  logic  state_a, state_b;
  int    checks = 0, failures = 0;

  always #1 clk = ~clk;

  mtj_model dut_a (.clk, .seed(seed_mix(1)), .i_reset, .i_write, .p_sw, .state_p(state_a));
  mtj_model dut_b (.clk, .seed(seed_mix(2)), .i_reset, .i_write, .p_sw, .state_p(state_b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One SBG-like cycle: reset for 3 clocks, idle, write for 2 clocks, idle.
  task automatic cycle_once(output logic a, output logic b, output logic after_reset_a);
    i_reset = 1'b1; repeat (3) @(posedge clk); #0.1;
    i_reset = 1'b0;
    after_reset_a = state_a;
    @(posedge clk); #0.1;
    i_write = 1'b1; repeat (2) @(posedge clk); #0.1;
    i_write = 1'b0; @(posedge clk); #0.1;
    a = state_a; b = state_b;
  endtask

  task automatic run_prob(input prob_t p, input bit check_stats);
    int ones_a = 0, ones_b = 0, both = 0, same = 0, resets_bad = 0;
    logic a, b, r;
    real pr, sd, fa;
    p_sw = p;
    for (int t = 0; t < N_TRIALS; t++) begin
      cycle_once(a, b, r);
      if (r) resets_bad++;
      ones_a += a; ones_b += b; both += (a & b); same += (a == b);
    end
    pr = real'(p) / real'(PROB_ONE);
    sd = $sqrt(pr * (1.0 - pr) / N_TRIALS);
    fa = real'(ones_a) / N_TRIALS;
    $display("p=%0.4f  a=%0.4f  b=%0.4f  a&b=%0.4f", pr, fa,
             real'(ones_b) / N_TRIALS, real'(both) / N_TRIALS);
    check(resets_bad == 0, $sformatf("reset left P %0d times", resets_bad));
    if (p == 0)        check(ones_a == 0 && ones_b == 0, "p=0 switched");
    if (p == PROB_ONE) check(ones_a == N_TRIALS && ones_b == N_TRIALS, "p=1 failed to switch");
    if (check_stats) begin
      check((fa - pr) < 4.0 * sd + 0.002 && (pr - fa) < 4.0 * sd + 0.002,
            $sformatf("fraction %f far from %f", fa, pr));
      check(same < N_TRIALS, "two seeds gave identical streams");
    end
    if (p == PROB_ONE / 2) begin
      fa = real'(both) / N_TRIALS;
      check(fa > 0.25 - 0.04 && fa < 0.25 + 0.04, $sformatf("AND of independent 0.5 streams = %f", fa));
    end
  endtask

  initial begin
    i_reset = 1'b0; i_write = 1'b0; p_sw = '0;
    repeat (2) @(posedge clk); #0.1;
    run_prob('0, 1'b0);
    run_prob(PROB_ONE, 1'b0);
    run_prob(prob_t'(PROB_ONE / 2), 1'b1);
    run_prob(prob_t'(PROB_ONE / 10), 1'b1);
    run_prob(prob_t'((PROB_ONE * 3) / 4), 1'b1);
    // A write current held for many clocks must draw only once: after a
    // failed draw the junction must stay AP until the next reset.
    begin
      int stayed = 0, flips_late = 0;
      p_sw = prob_t'(PROB_ONE / 2);
      for (int t = 0; t < 200; t++) begin
        i_reset = 1'b1; @(posedge clk); #0.1; i_reset = 1'b0;
        i_write = 1'b1; @(posedge clk); #0.1;
        if (!state_a) begin
          stayed++;
          repeat (20) @(posedge clk); #0.1;
          if (state_a) flips_late++;
        end
        i_write = 1'b0; @(posedge clk); #0.1;
      end
      check(stayed > 0 && flips_late == 0, $sformatf("held write switched late %0d times", flips_late));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
