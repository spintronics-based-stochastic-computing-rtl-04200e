`timescale 1ns/100ps
// tb_bbn_hd_prior: the p(HD=Y) circuit with the CPT of the heart-disease
// network (p(HD=Y|E,D) = 0.25, 0.45, 0.55, 0.75 for E,D = YY, YN, NY, NN).
// Every bit: p_hd must equal the multiplexer tree applied to the exposed SBG
// streams. Per query: the fraction of ones must be near the value of
//   [0.25 d + 0.45 (1-d)] e + [0.55 d + 0.75 (1-d)] (1-e)
// worked out here, for (d, e) = (0.25, 0.7) priors and for observed inputs.
module tb_bbn_hd_prior;
  import bis_pkg::*;

  localparam int N_BITS = 3000;
  localparam int LEN_W  = $clog2(4096 + 1);

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  sbg_ctrl_t        ctrl;
  logic             clear, bit_valid, busy, done;
  logic [LEN_W-1:0] bit_idx;
  prob_t            cpt [4], ctrl1_bias, ctrl2_bias;
  logic [3:0]       sb_cpt;
  logic [2:0]       sb_sel;
  logic             p_hd;
  int               checks = 0, failures = 0, ones = 0, mux_bad = 0;
  real              cptr [4] = '{0.25, 0.45, 0.55, 0.75};

  always #1 clk = ~clk;

  sbg_phase_ctrl #(.MAX_LEN(4096), .RESET_TICKS(2), .WRITE_TICKS(1), .READ_TICKS(2), .GAP_TICKS(1))
    u_ctrl (.clk, .rst_n, .start, .len(LEN_W'(N_BITS)), .ctrl, .clear, .bit_valid, .bit_idx, .busy, .done);

  bbn_hd_prior dut (.clk, .seed_base(32'd900), .ctrl, .cpt, .ctrl1_bias, .ctrl2_bias,
                    .sb_cpt, .sb_sel, .p_hd);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic prob_t code(input real p);
    return prob_t'($rtoi(p * PROB_ONE + 0.5));
  endfunction

  always @(posedge clk) if (bit_valid) begin
    logic up, lo;
    up = sb_sel[0] ? sb_cpt[0] : sb_cpt[1];
    lo = sb_sel[1] ? sb_cpt[2] : sb_cpt[3];
    if (p_hd != (sb_sel[2] ? up : lo)) mux_bad++;
    ones += p_hd;
  end

  task automatic query(input real d, input real e);
    real want, got, sd;
    want = (cptr[0] * d + cptr[1] * (1.0 - d)) * e + (cptr[2] * d + cptr[3] * (1.0 - d)) * (1.0 - e);
    ctrl1_bias = code(d); ctrl2_bias = code(e);
    ones = 0; mux_bad = 0;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    @(negedge clk); wait (done); @(negedge clk);
    got = real'(ones) / N_BITS;
    sd  = $sqrt(want * (1.0 - want) / N_BITS);
    $display("p(D=Y)=%0.2f p(E=Y)=%0.2f: p(HD=Y) %f, exact %f", d, e, got, want);
    check(mux_bad == 0, $sformatf("%0d bits disagree with the multiplexer tree", mux_bad));
    check(got - want < 4.0 * sd + 0.002 && want - got < 4.0 * sd + 0.002, "p(HD) far from exact");
  endtask

  initial begin
    for (int k = 0; k < 4; k++) cpt[k] = code(cptr[k]);
    ctrl1_bias = '0; ctrl2_bias = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    query(0.25, 0.7);   // no evidence
    query(1.0, 1.0);    // D and E observed yes
    query(0.0, 0.0);    // D and E observed no
    query(0.25, 1.0);   // E observed yes
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
