`timescale 1ns/100ps
// tb_bbn_system: the heart-disease belief-network system at its default
// phase lengths, running the five queries of the published example at
// T = 256 bits. For each query the select biases are (ctrl1, ctrl2) =
// p(D=Y) or 1 when D is observed, p(E=Y) or 1 when E is observed, and the
// evidence bits (ctrl3, ctrl4) mark observed BP and CP. Checked per query:
// the latency of 40*T cycles, and that the counts of p(HD), numerator and
// denominator each lie within 4 sigma (+1) of T times their exact
// probabilities, worked out here from the CPTs. The estimated posterior
// cnt_mol/cnt_den is printed next to the exact value.
module tb_bbn_system;
  import bis_pkg::*;

  localparam int LEN_W = $clog2(MAX_LEN_DEF + 1);
  localparam int T     = 256;

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [LEN_W-1:0] len = LEN_W'(T);
  prob_t            cpt_hd [4], cpt_sym [4], ctrl1_bias, ctrl2_bias;
  logic             ev_bp, ev_cp;
  logic [LEN_W-1:0] cnt_hd, cnt_mol, cnt_den;
  logic             busy, done;
  int               checks = 0, failures = 0;

  real hd_r  [4] = '{0.25, 0.45, 0.55, 0.75};
  real sym_r [4] = '{0.85, 0.74, 0.2, 0.3};
  localparam real P_D = 0.25, P_E = 0.7;

  always #1 clk = ~clk;

  bbn_system dut (.clk, .rst_n, .start, .len, .cpt_hd, .ctrl1_bias, .ctrl2_bias,
                  .cpt_sym, .ev_bp, .ev_cp, .cnt_hd, .cnt_mol, .cnt_den, .busy, .done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic prob_t code(input real p);
    return prob_t'($rtoi(p * PROB_ONE + 0.5));
  endfunction

  function automatic bit near(input int cnt, input real p);
    real sd = $sqrt(T * p * (1.0 - p));
    return real'(cnt) <= T * p + 4.0 * sd + 1.0 && real'(cnt) >= T * p - 4.0 * sd - 1.0;
  endfunction

  task automatic query(input string name, input real c1, input real c2, input logic c3,
                       input logic c4, input real pub_exact, input real pub_sc);
    real phd, ly, ln, mol, den;
    int cyc = 0;
    phd = (hd_r[0] * c1 + hd_r[1] * (1.0 - c1)) * c2 + (hd_r[2] * c1 + hd_r[3] * (1.0 - c1)) * (1.0 - c2);
    ly  = (c3 ? sym_r[0] : 1.0) * (c4 ? sym_r[1] : 1.0);
    ln  = (c3 ? sym_r[2] : 1.0) * (c4 ? sym_r[3] : 1.0);
    mol = phd * ly;
    den = phd * ly + (1.0 - phd) * ln;
    ctrl1_bias = code(c1); ctrl2_bias = code(c2); ev_bp = c3; ev_cp = c4;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("%-16s p(HD)=%0.3f (%0.3f)  posterior=%0.3f exact=%0.3f  [published %0.3f / %0.3f]",
             name, real'(cnt_hd) / T, phd, real'(cnt_mol) / real'(cnt_den), mol / den,
             pub_exact, pub_sc);
    check(cyc == 40 * T, $sformatf("%s: latency %0d", name, cyc));
    check(near(int'(cnt_hd), phd), {name, ": p(HD) count"});
    check(near(int'(cnt_mol), mol), {name, ": numerator count"});
    check(near(int'(cnt_den), den), {name, ": denominator count"});
  endtask

  initial begin
    for (int k = 0; k < 4; k++) begin cpt_hd[k] = code(hd_r[k]); cpt_sym[k] = code(sym_r[k]); end
    ctrl1_bias = '0; ctrl2_bias = '0; ev_bp = 0; ev_cp = 0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    query("p(HD|BP)",        P_D, P_E, 1'b1, 1'b0, 0.803, 0.805);
    query("p(HD|D,E,BP)",    1.0, 1.0, 1'b1, 1'b0, 0.586, 0.592);
    query("p(HD|E,BP)",      P_D, 1.0, 1'b1, 1'b0, 0.687, 0.694);
    query("p(HD|D,E,BP,CP)", 1.0, 1.0, 1'b1, 1'b1, 0.777, 0.742);
    query("p(HD|CP)",        P_D, P_E, 1'b0, 1'b1, 0.703, 0.700);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
