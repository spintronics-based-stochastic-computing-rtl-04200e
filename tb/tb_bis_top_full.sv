`timescale 1ns/100ps
// tb_bis_top_full: one complete operation of the chip with every parameter
// at its default: a 64 x 64 target-location inference with T = 256 bits
// (24576 SBGs), and at the same time the belief-network query p(HD|BP).
// Checked: the 40*T latency; the most probable cell lies within 3 length
// units of the true target; KL(sc || exact) of the normalised counts from
// the exact posterior below 0.12; numerator and denominator of the
// belief-network query within 4 sigma (+1) of their exact values.
module tb_bis_top_full;
  import bis_pkg::*;
  import df_workload_pkg::*;

  localparam int GRID   = 64;
  localparam int N_ROWS = GRID * GRID;
  localparam int LEN_W  = $clog2(MAX_LEN_DEF + 1);
  localparam int T      = 256;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             df_start = 1'b0, bbn_start = 1'b0;
  logic [LEN_W-1:0] df_len = LEN_W'(T), bbn_len = LEN_W'(T);
  prob_t            df_vbias [N_ROWS][6];
  logic [LEN_W-1:0] df_count [N_ROWS];
  logic             df_busy, df_done, bbn_busy, bbn_done;
  prob_t            bbn_cpt_hd [4], bbn_cpt_sym [4], bbn_ctrl1_bias, bbn_ctrl2_bias;
  logic             bbn_ev_bp, bbn_ev_cp;
  logic [LEN_W-1:0] bbn_cnt_hd, bbn_cnt_mol, bbn_cnt_den;
  int               checks = 0, failures = 0;

  real hd_r  [4] = '{0.25, 0.45, 0.55, 0.75};
  real sym_r [4] = '{0.85, 0.74, 0.2, 0.3};

  always #1 clk = ~clk;

  bis_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic prob_t code(input real p);
    return prob_t'($rtoi(p * PROB_ONE + 0.5));
  endfunction

  initial begin
    int  cyc = 0, best = 0;
    real sum_c = 0.0, sum_e = 0.0, kl = 0.0, bx, by, phd, mol, den, sd;
    for (int r = 0; r < N_ROWS; r++)
      for (int k = 0; k < 6; k++) df_vbias[r][k] = to_code(likelihood(k, GRID, r));
    for (int k = 0; k < 4; k++) begin bbn_cpt_hd[k] = code(hd_r[k]); bbn_cpt_sym[k] = code(sym_r[k]); end
    bbn_ctrl1_bias = code(0.25); bbn_ctrl2_bias = code(0.7); bbn_ev_bp = 1'b1; bbn_ev_cp = 1'b0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    @(negedge clk); df_start = 1'b1; bbn_start = 1'b1;
    @(negedge clk); df_start = 1'b0; bbn_start = 1'b0;
    while (!df_done) begin @(negedge clk); cyc++; end
    check(cyc == 40 * T, $sformatf("latency %0d", cyc));
    check(bbn_done, "belief network not done with the grid");

    for (int r = 0; r < N_ROWS; r++) begin
      sum_c += real'(df_count[r]);
      sum_e += exact_post(GRID, r);
      if (df_count[r] > df_count[best]) best = r;
    end
    for (int r = 0; r < N_ROWS; r++) if (df_count[r] != 0) begin
      real q, p;
      q   = real'(df_count[r]) / sum_c;
      p   = exact_post(GRID, r) / sum_e;
      kl += q * $ln(q / p);
    end
    bx = (real'(best % GRID) + 0.5) * PLANE / GRID;
    by = (real'(best / GRID) + 0.5) * PLANE / GRID;
    $display("64x64, T=%0d: most probable position (%0.2f, %0.2f), target (%0.1f, %0.1f), KL=%0.4f, ones=%0d",
             T, bx, by, TX, TY, kl, $rtoi(sum_c));
    check((bx - TX) ** 2 + (by - TY) ** 2 <= 9.0, "most probable cell far from target");
    check(sum_c > 0.0 && kl < 0.12, $sformatf("KL %f", kl));

    phd = (hd_r[0] * 0.25 + hd_r[1] * 0.75) * 0.7 + (hd_r[2] * 0.25 + hd_r[3] * 0.75) * 0.3;
    mol = phd * sym_r[0];
    den = mol + (1.0 - phd) * sym_r[2];
    $display("p(HD|BP): %0.3f, exact %0.3f", real'(bbn_cnt_mol) / real'(bbn_cnt_den), mol / den);
    sd = $sqrt(T * mol * (1.0 - mol));
    check(real'(bbn_cnt_mol) <= T * mol + 4.0 * sd + 1.0 && real'(bbn_cnt_mol) >= T * mol - 4.0 * sd - 1.0, "numerator");
    sd = $sqrt(T * den * (1.0 - den));
    check(real'(bbn_cnt_den) <= T * den + 4.0 * sd + 1.0 && real'(bbn_cnt_den) >= T * den - 4.0 * sd - 1.0, "denominator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
