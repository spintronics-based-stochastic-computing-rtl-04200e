`timescale 1ns/100ps
// tb_sc_counter: feeds random bitstreams with random bit_valid spacing and
// compares the count with a count kept here; checks clear, that bits
// without bit_valid are ignored, and saturation at MAX_LEN.
module tb_sc_counter;
  localparam int MAX_LEN = 256;
  localparam int CNT_W   = $clog2(MAX_LEN + 1);

  logic             clk = 1'b0, rst_n = 1'b0, clear = 1'b0, bit_valid = 1'b0, bit_in = 1'b0;
  logic [CNT_W-1:0] count;
  int               checks = 0, failures = 0;

  always #1 clk = ~clk;

  sc_counter #(.MAX_LEN(MAX_LEN)) dut (.clk, .rst_n, .clear, .bit_valid, .bit_in, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int expect_cnt;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(count == 0, "count not 0 after reset");
    for (int run = 0; run < 6; run++) begin
      int n = (run == 5) ? MAX_LEN + 40 : 1 + ($urandom % MAX_LEN);
      clear = 1'b1; @(negedge clk); clear = 1'b0;
      check(count == 0, "clear");
      expect_cnt = 0;
      for (int b = 0; b < n; b++) begin
        bit_in    = (run == 5) ? 1'b1 : 1'(($urandom % 100) < (run * 20));
        bit_valid = 1'b1;
        if (bit_in && expect_cnt < MAX_LEN) expect_cnt++;
        @(negedge clk);
        bit_valid = 1'b0;
        bit_in    = 1'b1;                 // ones without bit_valid: ignored
        repeat ($urandom % 3) @(negedge clk);
      end
      check(int'(count) == expect_cnt, $sformatf("run %0d: count %0d expected %0d", run, count, expect_cnt));
    end
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
