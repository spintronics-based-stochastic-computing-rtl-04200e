`timescale 1ns/100ps
// tb_df_row: one data-fusion row driven by a phase sequencer (short phase
// lengths to save time). At every bit it checks that the row output equals
// the AND of the six SBG streams; at the end it checks that every stream's
// fraction of ones is near its bias, that two streams are uncorrelated
// (fraction of sb0&sb1 near p0*p1), and that the row output's fraction is
// near the product of the six probabilities (4 sigma bounds).
module tb_df_row;
  import bis_pkg::*;

  localparam int N_BITS = 3000;
  localparam int LEN_W  = $clog2(4096 + 1);

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  sbg_ctrl_t        ctrl;
  logic             clear, bit_valid, busy, done;
  logic [LEN_W-1:0] bit_idx;
  prob_t            vbias [6];
  logic [5:0]       sb;
  logic             o;
  int               checks = 0, failures = 0;
  int               ones [6], ones_o = 0, ones_01 = 0, and_bad = 0;
  real              p [6] = '{0.9, 0.8, 0.95, 0.7, 0.85, 0.9};

  always #1 clk = ~clk;

  sbg_phase_ctrl #(.MAX_LEN(4096), .RESET_TICKS(2), .WRITE_TICKS(1), .READ_TICKS(2), .GAP_TICKS(1))
    u_ctrl (.clk, .rst_n, .start, .len(LEN_W'(N_BITS)), .ctrl, .clear, .bit_valid, .bit_idx, .busy, .done);

  df_row dut (.clk, .seed_base(32'd600), .vbias, .ctrl, .sb, .o);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(input real got, input real want, input int n);
    real sd = $sqrt(want * (1.0 - want) / n);
    return (got - want) <= 4.0 * sd + 0.002 && (want - got) <= 4.0 * sd + 0.002;
  endfunction

  always @(posedge clk) if (bit_valid) begin
    if (o != &sb) and_bad++;
    for (int k = 0; k < 6; k++) ones[k] += sb[k];
    ones_o  += o;
    ones_01 += sb[0] & sb[1];
  end

  initial begin
    real prod = 1.0;
    for (int k = 0; k < 6; k++) begin
      vbias[k] = prob_t'($rtoi(p[k] * PROB_ONE + 0.5));
      ones[k]  = 0;
      prod    *= p[k];
    end
    repeat (2) @(negedge clk); rst_n = 1'b1;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    wait (done);
    check(and_bad == 0, $sformatf("%0d bits where o != AND of streams", and_bad));
    for (int k = 0; k < 6; k++)
      check(near(real'(ones[k]) / N_BITS, p[k], N_BITS),
            $sformatf("stream %0d: %f for %f", k, real'(ones[k]) / N_BITS, p[k]));
    check(near(real'(ones_01) / N_BITS, p[0] * p[1], N_BITS), "streams 0 and 1 correlated");
    $display("row output %f, product %f", real'(ones_o) / N_BITS, prod);
    check(near(real'(ones_o) / N_BITS, prod, N_BITS), "row output far from product");
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
