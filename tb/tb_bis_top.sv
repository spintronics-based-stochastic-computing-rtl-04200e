`timescale 1ns/100ps
// tb_bis_top: end-to-end test of the chip at a 16 x 16 grid (default phase
// lengths, default bitstream capacity).
//  - Target location: the likelihood biases of every cell are computed from
//    the sensor model (df_workload_pkg) and the grid inference is run with
//    T = 64, 128 and 256 bits, while the belief network runs its first query
//    at the same time. For each T: the latency is 40*T cycles, the most
//    probable cell is within one cell of the true target cell, and the
//    Kullback-Leibler divergence KL(sc || exact) of the normalised counts
//    from the exact posterior stays below a bound that shrinks with T.
//  - Belief network: the five published queries at T = 256; numerator and
//    denominator counts within 4 sigma (+1) of their exact values.
//  - Mechanisms counted, each must happen: SBG write failures and write
//    successes, each bitstream length, prior-driven and observed-driven
//    selects, each evidence bit at 0 and at 1, both systems running at once.
module tb_bis_top;
  import bis_pkg::*;
  import df_workload_pkg::*;

  localparam int GRID   = 16;
  localparam int N_ROWS = GRID * GRID;
  localparam int LEN_W  = $clog2(MAX_LEN_DEF + 1);

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             df_start = 1'b0, bbn_start = 1'b0;
  logic [LEN_W-1:0] df_len = '0, bbn_len = LEN_W'(256);
  prob_t            df_vbias [N_ROWS][6];
  logic [LEN_W-1:0] df_count [N_ROWS];
  logic             df_busy, df_done, bbn_busy, bbn_done;
  prob_t            bbn_cpt_hd [4], bbn_cpt_sym [4], bbn_ctrl1_bias, bbn_ctrl2_bias;
  logic             bbn_ev_bp, bbn_ev_cp;
  logic [LEN_W-1:0] bbn_cnt_hd, bbn_cnt_mol, bbn_cnt_den;
  int               checks = 0, failures = 0;

  // mechanism counters
  int n_write_fail = 0, n_write_ok = 0, n_len64 = 0, n_len128 = 0, n_len256 = 0;
  int n_sel_prior = 0, n_sel_observed = 0, n_ev0 = 0, n_ev1 = 0, n_concurrent = 0;

  real hd_r  [4] = '{0.25, 0.45, 0.55, 0.75};
  real sym_r [4] = '{0.85, 0.74, 0.2, 0.3};

  always #1 clk = ~clk;

  bis_top #(.GRID(GRID)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // A write failure or success of one SBG: its bit after each read.
  always @(posedge clk) if (dut.u_bbn.bit_valid) begin
    if (dut.u_bbn.sb_prior_cpt[0]) n_write_ok++; else n_write_fail++;
  end
  always @(posedge clk) if (df_busy && bbn_busy) n_concurrent++;

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic prob_t code(input real p);
    return prob_t'($rtoi(p * PROB_ONE + 0.5));
  endfunction

  task automatic df_run(input int t, input real kl_bound);
    int  cyc = 0, best = 0, tc, dx, dy;
    real sum_c = 0.0, sum_e = 0.0, kl = 0.0;
    df_len = LEN_W'(t);
    @(negedge clk); df_start = 1'b1; @(negedge clk); df_start = 1'b0;
    while (!df_done) begin @(negedge clk); cyc++; end
    check(cyc == 40 * t, $sformatf("df latency %0d for T=%0d", cyc, t));
    for (int r = 0; r < N_ROWS; r++) begin
      sum_c += real'(df_count[r]);
      sum_e += exact_post(GRID, r);
      if (df_count[r] > df_count[best]) best = r;
    end
    for (int r = 0; r < N_ROWS; r++) if (df_count[r] != 0) begin
      real q = real'(df_count[r]) / sum_c;
      real p = exact_post(GRID, r) / sum_e;
      kl += q * $ln(q / p);
    end
    tc = target_cell(GRID);
    dx = (best % GRID) - (tc % GRID);
    dy = (best / GRID) - (tc / GRID);
    $display("T=%0d: most probable cell (%0d,%0d), target cell (%0d,%0d), KL=%0.4f",
             t, best % GRID, best / GRID, tc % GRID, tc / GRID, kl);
    check(dx >= -1 && dx <= 1 && dy >= -1 && dy <= 1, "most probable cell away from target");
    check(sum_c > 0.0 && kl < kl_bound, $sformatf("KL %f above %f", kl, kl_bound));
    if (t == 64) n_len64++;
    if (t == 128) n_len128++;
    if (t == 256) n_len256++;
  endtask

  task automatic bbn_query(input string name, input real c1, input real c2, input logic c3, input logic c4);
    real phd, ly, ln, mol, den, sdm, sdd;
    phd = (hd_r[0] * c1 + hd_r[1] * (1.0 - c1)) * c2 + (hd_r[2] * c1 + hd_r[3] * (1.0 - c1)) * (1.0 - c2);
    ly  = (c3 ? sym_r[0] : 1.0) * (c4 ? sym_r[1] : 1.0);
    ln  = (c3 ? sym_r[2] : 1.0) * (c4 ? sym_r[3] : 1.0);
    mol = phd * ly;
    den = mol + (1.0 - phd) * ln;
    bbn_ctrl1_bias = code(c1); bbn_ctrl2_bias = code(c2); bbn_ev_bp = c3; bbn_ev_cp = c4;
    @(negedge clk); bbn_start = 1'b1; @(negedge clk); bbn_start = 1'b0;
    @(negedge clk); wait (bbn_done); @(negedge clk);
    sdm = $sqrt(256.0 * mol * (1.0 - mol));
    sdd = $sqrt(256.0 * den * (1.0 - den));
    $display("%-16s posterior %0.3f, exact %0.3f", name, real'(bbn_cnt_mol) / real'(bbn_cnt_den), mol / den);
    check(absr(real'(bbn_cnt_mol) - 256.0 * mol) <= 4.0 * sdm + 1.0, {name, ": numerator"});
    check(absr(real'(bbn_cnt_den) - 256.0 * den) <= 4.0 * sdd + 1.0, {name, ": denominator"});
    if ((c1 > 0.0 && c1 < 1.0) || (c2 > 0.0 && c2 < 1.0)) n_sel_prior++;
    if (c1 == 1.0 || c2 == 1.0) n_sel_observed++;
    if (!c3 || !c4) n_ev0++;
    if (c3 || c4) n_ev1++;
  endtask

  initial begin
    for (int r = 0; r < N_ROWS; r++)
      for (int k = 0; k < 6; k++) df_vbias[r][k] = to_code(likelihood(k, GRID, r));
    for (int k = 0; k < 4; k++) begin bbn_cpt_hd[k] = code(hd_r[k]); bbn_cpt_sym[k] = code(sym_r[k]); end
    bbn_ctrl1_bias = '0; bbn_ctrl2_bias = '0; bbn_ev_bp = 0; bbn_ev_cp = 0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    fork
      df_run(64, 0.30);
      bbn_query("p(HD|BP)", 0.25, 0.7, 1'b1, 1'b0);
    join
    df_run(128, 0.20);
    df_run(256, 0.12);
    bbn_query("p(HD|D,E,BP)",    1.0,  1.0, 1'b1, 1'b0);
    bbn_query("p(HD|E,BP)",      0.25, 1.0, 1'b1, 1'b0);
    bbn_query("p(HD|D,E,BP,CP)", 1.0,  1.0, 1'b1, 1'b1);
    bbn_query("p(HD|CP)",        0.25, 0.7, 1'b0, 1'b1);
    $display("mechanisms: write_fail=%0d write_ok=%0d T64=%0d T128=%0d T256=%0d prior_sel=%0d observed_sel=%0d ev0=%0d ev1=%0d concurrent=%0d",
             n_write_fail, n_write_ok, n_len64, n_len128, n_len256, n_sel_prior, n_sel_observed,
             n_ev0, n_ev1, n_concurrent);
    check(n_write_fail > 0, "no SBG write failure seen");
    check(n_write_ok > 0, "no SBG write success seen");
    check(n_len64 > 0 && n_len128 > 0 && n_len256 > 0, "a bitstream length not run");
    check(n_sel_prior > 0 && n_sel_observed > 0, "a select mode not run");
    check(n_ev0 > 0 && n_ev1 > 0, "an evidence setting not run");
    check(n_concurrent > 0, "systems never ran at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
