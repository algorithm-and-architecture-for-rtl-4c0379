// tb_common.svh: check counters, clock and watchdog shared by the testbenches.
// Define WATCHDOG_CYCLES before including to change the time-out.
`ifndef WATCHDOG_CYCLES
`define WATCHDOG_CYCLES 200000
`endif
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (`WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish_tb();
  end
