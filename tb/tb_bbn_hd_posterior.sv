`timescale 1ns/100ps
// tb_bbn_hd_posterior: the p(HD=Y|BP,CP) circuit with the CPTs of the
// heart-disease network (p(BP=Y|HD) = 0.85 / 0.2, p(CP=Y|HD) = 0.74 / 0.3).
// The p(HD) input stream is generated here with probability 0.49. Every
// bit: molecule and denominator must equal the AND/multiplexer network
// applied to the exposed SBG streams and the evidence bits. Per evidence
// setting: count(molecule)/count(denominator) must be near the exact
// posterior worked out here.
module tb_bbn_hd_posterior;
  import bis_pkg::*;

  localparam int  N_BITS = 3000;
  localparam int  LEN_W  = $clog2(4096 + 1);
  localparam real PHD    = 0.49;

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  sbg_ctrl_t        ctrl;
  logic             clear, bit_valid, busy, done;
  logic [LEN_W-1:0] bit_idx;
  prob_t            cpt [4];
  logic             ev_bp, ev_cp, p_hd = 1'b0;
  logic [3:0]       sb_cpt;
  logic             molecule, denominator;
  int               checks = 0, failures = 0, n_mol = 0, n_den = 0, net_bad = 0;
  real              cptr [4] = '{0.85, 0.74, 0.2, 0.3};

  always #1 clk = ~clk;

  sbg_phase_ctrl #(.MAX_LEN(4096), .RESET_TICKS(2), .WRITE_TICKS(1), .READ_TICKS(2), .GAP_TICKS(1))
    u_ctrl (.clk, .rst_n, .start, .len(LEN_W'(N_BITS)), .ctrl, .clear, .bit_valid, .bit_idx, .busy, .done);

  bbn_hd_posterior dut (.clk, .seed_base(32'd1200), .ctrl, .cpt, .ev_bp, .ev_cp, .p_hd,
                        .sb_cpt, .molecule, .denominator);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (bit_valid) begin
      logic ly, ln;
      ly = (ev_bp ? sb_cpt[0] : 1'b1) & (ev_cp ? sb_cpt[1] : 1'b1);
      ln = (ev_bp ? sb_cpt[2] : 1'b1) & (ev_cp ? sb_cpt[3] : 1'b1);
      if (molecule != (p_hd & ly) || denominator != (p_hd ? ly : ln)) net_bad++;
      n_mol += molecule;
      n_den += denominator;
    end
    // new p(HD) bit for every SBG cycle, changed during the reset phase
    if (ctrl.rst0) p_hd <= ($urandom % 10000) < $rtoi(PHD * 10000);
  end

  task automatic query(input logic bp, input logic cp);
    real ly, ln, want, got;
    ly = (bp ? cptr[0] : 1.0) * (cp ? cptr[1] : 1.0);
    ln = (bp ? cptr[2] : 1.0) * (cp ? cptr[3] : 1.0);
    want = ly * PHD / (ly * PHD + ln * (1.0 - PHD));
    ev_bp = bp; ev_cp = cp;
    n_mol = 0; n_den = 0; net_bad = 0;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    @(negedge clk); wait (done); @(negedge clk);
    got = real'(n_mol) / real'(n_den);
    $display("BP=%0d CP=%0d: posterior %f, exact %f", bp, cp, got, want);
    check(net_bad == 0, $sformatf("%0d bits disagree with the AND/MUX network", net_bad));
    check(n_mol <= n_den, "numerator above denominator");
    check(got - want < 0.04 && want - got < 0.04, "posterior far from exact");
  endtask

  initial begin
    for (int k = 0; k < 4; k++) cpt[k] = prob_t'($rtoi(cptr[k] * PROB_ONE + 0.5));
    ev_bp = 1'b0; ev_cp = 1'b0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    query(1'b1, 1'b0);
    query(1'b0, 1'b1);
    query(1'b1, 1'b1);
    query(1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
