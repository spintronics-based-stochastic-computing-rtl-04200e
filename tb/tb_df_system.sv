`timescale 1ns/100ps
// tb_df_system: a 4 x 4 data-fusion system with short phase lengths.
// Every row gets its own six random biases. After one inference of T bits
// each row's count must be near T times the product of its six
// probabilities (4 sigma bound); the count is also compared, bit by bit,
// with a count of the AND of the row's six SBG streams kept here through
// hierarchical references. A second inference checks that the counters are
// cleared between runs, and the start-to-done latency is checked.
module tb_df_system;
  import bis_pkg::*;

  localparam int GRID   = 4;
  localparam int N_ROWS = GRID * GRID;
  localparam int MAXL   = 1024;
  localparam int LEN_W  = $clog2(MAXL + 1);
  localparam int PER    = 2 + 1 + 2 + 3 * 1;

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [LEN_W-1:0] len;
  prob_t            vbias [N_ROWS][6];
  logic [LEN_W-1:0] count [N_ROWS];
  logic             busy, done;
  int               checks = 0, failures = 0;
  real              prod [N_ROWS];
  int               own [N_ROWS];

  always #1 clk = ~clk;

  df_system #(.GRID(GRID), .MAX_LEN(MAXL), .SEED_BASE(5000),
              .RESET_TICKS(2), .WRITE_TICKS(1), .READ_TICKS(2), .GAP_TICKS(1))
    dut (.clk, .rst_n, .start, .len, .vbias, .count, .busy, .done);

  // independent count of each row: AND of its six SBG streams
  for (genvar r = 0; r < N_ROWS; r++) begin : g_mon
    always @(posedge clk) begin
      if (dut.clear) own[r] <= 0;
      else if (dut.bit_valid && (&dut.g_row[r].sb)) own[r] <= own[r] + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic infer(input int t);
    int cyc = 0, bad_stat = 0, bad_own = 0;
    len = LEN_W'(t);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == PER * t, $sformatf("latency %0d, expected %0d", cyc, PER * t));
    for (int r = 0; r < N_ROWS; r++) begin
      real want = prod[r] * t;
      real sd   = $sqrt(want * (1.0 - prod[r]));
      if (real'(count[r]) > want + 4.0 * sd + 1.0 || real'(count[r]) < want - 4.0 * sd - 1.0) bad_stat++;
      if (int'(count[r]) != own[r]) bad_own++;
    end
    check(bad_stat == 0, $sformatf("%0d rows far from their product", bad_stat));
    check(bad_own == 0, $sformatf("%0d rows whose count is not the AND count", bad_own));
  endtask

  initial begin
    for (int r = 0; r < N_ROWS; r++) begin
      prod[r] = 1.0;
      for (int k = 0; k < 6; k++) begin
        vbias[r][k] = prob_t'(PROB_ONE / 2 + ($urandom % (PROB_ONE / 2 + 1)));
        prod[r] *= real'(vbias[r][k]) / real'(PROB_ONE);
      end
    end
    vbias[3][2] = '0;  prod[3] = 0.0;        // one impossible position
    for (int k = 0; k < 6; k++) vbias[5][k] = PROB_ONE;
    prod[5] = 1.0;                          // one certain position
    len = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    infer(1000);
    check(count[3] == 0 && count[5] == LEN_W'(1000), "certain/impossible rows");
    infer(200);
    check(count[5] == LEN_W'(200), "counters not cleared between runs");
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
