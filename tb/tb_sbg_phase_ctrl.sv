`timescale 1ns/100ps
// tb_sbg_phase_ctrl: checks the SBG phase sequencer at its default phase
// lengths. For each run it records, cycle by cycle, the four phase signals
// and compares them with a reference schedule built here from the phase
// lengths (reset 10, gap 5, write 5, gap 5, read 10, gap 5 ticks per bit).
// It also checks: Write En high exactly in reset and write, never Rst. 0 and
// Wrt. 1 together, one bit_valid per bit in the tick after each read, done
// high 40*T cycles after the first cycle following the start edge, a
// start while busy ignored, and len = 0 finishing at once.
module tb_sbg_phase_ctrl;
  import bis_pkg::*;

  localparam int LEN_W = $clog2(MAX_LEN_DEF + 1);
  localparam int PER   = RESET_TICKS_DEF + WRITE_TICKS_DEF + READ_TICKS_DEF + 3 * GAP_TICKS_DEF;

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [LEN_W-1:0] len = '0;
  sbg_ctrl_t        ctrl;
  logic             clear, bit_valid, busy, done;
  logic [LEN_W-1:0] bit_idx;
  int               checks = 0, failures = 0;

  always #1 clk = ~clk;

  sbg_phase_ctrl dut (.clk, .rst_n, .start, .len, .ctrl, .clear, .bit_valid,
                      .bit_idx, .busy, .done);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // expected phase signals at tick t (0-based) of a bit period
  function automatic sbg_ctrl_t ref_ctrl(input int t);
    sbg_ctrl_t c = '0;
    int r0 = 0, r1 = RESET_TICKS_DEF;
    int w0 = r1 + GAP_TICKS_DEF, w1 = w0 + WRITE_TICKS_DEF;
    int d0 = w1 + GAP_TICKS_DEF, d1 = d0 + READ_TICKS_DEF;
    if (t >= r0 && t < r1) begin c.write_en = 1; c.rst0 = 1; end
    if (t >= w0 && t < w1) begin c.write_en = 1; c.wrt1 = 1; end
    if (t >= d0 && t < d1) c.read_en = 1;
    return c;
  endfunction

  task automatic run(input int n);
    int cyc, mism = 0, valids = 0, valid_bad = 0, clears = 0;
    len = LEN_W'(n);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    // cycle 0 is the first after start is taken: clear, first reset tick
    cyc = 0;
    check(clear == 1'b1, "no clear after start");
    check(busy == (n != 0), "busy wrong after start");
    while (!done) begin
      begin
        int t = cyc % PER;
        if (ctrl != ref_ctrl(t)) mism++;
        if (bit_valid) begin
          valids++;
          if (t != RESET_TICKS_DEF + WRITE_TICKS_DEF + READ_TICKS_DEF + 2 * GAP_TICKS_DEF) valid_bad++;
        end
        if (clear && cyc != 0) clears++;
      end
      if (n != 0 && cyc == 20) begin start = 1'b1; len = '0; end   // must be ignored
      if (cyc == 21) start = 1'b0;
      @(negedge clk); cyc++;
      if (cyc > 50 * PER * (n + 1)) break;
    end
    $display("len=%0d: done after %0d cycles", n, cyc);
    check(mism == 0, $sformatf("%0d cycles with wrong phase signals", mism));
    check(valids == n, $sformatf("%0d bit_valid pulses for %0d bits", valids, n));
    check(valid_bad == 0, "bit_valid not in the tick after read");
    check(clears == 0, "clear during run");
    check(cyc == PER * n, $sformatf("latency %0d cycles, expected %0d", cyc, PER * n));
    check(bit_idx == LEN_W'(n), "bit_idx at done");
    check(!busy, "busy at done");
    repeat (5) @(negedge clk);
    check(done && ctrl == '0, "done not held or phase not idle");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    check(!busy && !done && ctrl == '0, "not idle after reset");
    run(1);
    run(3);
    run(0);
    run(64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // phase-signal rules at every clock
  always @(posedge clk) if (rst_n) begin
    if (ctrl.rst0 && ctrl.wrt1) begin failures++; $display("FAIL: Rst. 0 and Wrt. 1 together"); end
    if (ctrl.write_en != (ctrl.rst0 || ctrl.wrt1)) begin failures++; $display("FAIL: Write En mismatch"); end
  end

  initial begin
    #50000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
