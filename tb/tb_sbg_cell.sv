`timescale 1ns/100ps
// tb_sbg_cell: checks the SBG cell's write driver, path selection and
// sense amplifier by driving the four phase signals by hand.
//  - reset (Write En + Rst. 0) then write (Write En + Wrt. 1) at p = 1 reads 1;
//    at p = 0 reads 0;
//  - without Write En, neither Rst. 0 nor Wrt. 1 reaches the junction;
//  - a write at p = 0 leaves a P junction at P (no reset, no change);
//  - readout changes only during Read En;
//  - at p = 0.3 the fraction of ones over 1000 cycles is within 4 sigma.
module tb_sbg_cell;
  import bis_pkg::*;

  logic      clk = 1'b0;
  prob_t     vbias;
  sbg_ctrl_t ctrl;
  logic      readout;
  int        checks = 0, failures = 0;

  always #1 clk = ~clk;

  sbg_cell dut (.clk, .seed(seed_mix(77)), .vbias, .ctrl, .readout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic drive(input logic we, input logic r0, input logic w1, input logic re, input int n);
    ctrl = '{write_en: we, rst0: r0, wrt1: w1, read_en: re};
    repeat (n) @(posedge clk);
    #0.1;
  endtask

  task automatic idle(input int n); drive(0, 0, 0, 0, n); endtask
  task automatic do_reset();        drive(1, 1, 0, 0, 4); idle(1); endtask
  task automatic do_write();        drive(1, 0, 1, 0, 2); idle(1); endtask
  task automatic do_read(output logic b); drive(0, 0, 0, 1, 3); b = readout; idle(1); endtask

  initial begin
    logic b, held;
    int ones;
    ctrl = '0; vbias = '0;
    idle(2);

    vbias = PROB_ONE; do_reset(); do_write(); do_read(b);
    check(b == 1'b1, "p=1 write did not read 1");

    // readout must hold while not reading, even after a reset
    held = readout; do_reset(); idle(3);
    check(readout == held, "readout changed outside read phase");
    do_read(b);
    check(b == 1'b0, "reset did not read 0");

    vbias = '0; do_reset(); do_write(); do_read(b);
    check(b == 1'b0, "p=0 write read 1");

    // Wrt. 1 without Write En must not write
    vbias = PROB_ONE; do_reset(); drive(0, 0, 1, 0, 3); idle(1); do_read(b);
    check(b == 1'b0, "write current flowed without Write En");

    // Rst. 0 without Write En must not reset
    do_reset(); do_write(); drive(0, 1, 0, 0, 4); idle(1); do_read(b);
    check(b == 1'b1, "reset current flowed without Write En");

    // a p=0 write on a P junction keeps it P
    vbias = '0; do_write(); do_read(b);
    check(b == 1'b1, "write at p=0 changed a P junction");

    // statistics at p = 0.3
    vbias = prob_t'((PROB_ONE * 3) / 10);
    ones = 0;
    for (int t = 0; t < 1000; t++) begin
      do_reset(); do_write(); do_read(b); ones += b;
    end
    $display("p=0.3: %0d ones of 1000", ones);
    check(ones > 300 - 58 && ones < 300 + 58, $sformatf("p=0.3 gave %0d/1000", ones));

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
