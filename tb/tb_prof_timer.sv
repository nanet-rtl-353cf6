// tb_prof_timer - self-checking test of the profiling cycle counter.
//
// Runs the counter with a random enable pattern and random clears, keeping
// an independent count in the testbench, and compares every cycle; a narrow
// 8-bit instance checks the wrap-around.
module tb_prof_timer;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        en, clr;
  logic [31:0] count;
  logic [7:0]  count8;

  prof_timer #(.W(32)) dut   (.clk, .rst_n, .en, .clr, .count(count));
  prof_timer #(.W(8))  dut8  (.clk, .rst_n, .en, .clr, .count(count8));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  longint model = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    check(count == 0 && count8 == 0, "reset value");
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      en  = (k < 1000) ? 1'b1 : ($urandom % 4 != 0);
      clr = (k >= 1000) && ($urandom % 700 == 0);
      @(negedge clk);
      if (clr) model = 0;
      else if (en) model++;
      check(count == 32'(model), $sformatf("count %0d exp %0d", count, model));
      check(count8 == 8'(model), "8-bit count wraps");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
