// Shared testbench scaffolding: clock, reset, check counters, the result line
// and a cycle-count watchdog. Expects a localparam int WatchdogCycles.
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin : watchdog
    repeat (WatchdogCycles) @(posedge clk);
    $display("FAIL: watchdog expired");
    failures++;
    finish();
  end
