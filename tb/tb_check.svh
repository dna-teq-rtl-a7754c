// Shared testbench scaffolding: clock, check counters, result line, watchdog.
// Include inside a testbench module after declaring WATCHDOG (cycles).
logic clk = 0;
always #5 clk = ~clk;
int checks = 0, failures = 0;

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    $display("FAIL: %s", what);
  end
endtask

task automatic finish();
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
endtask

initial begin
  repeat (WATCHDOG) @(posedge clk);
  failures++;
  $display("FAIL: watchdog");
  finish();
end
