// tb_util.svh: common testbench plumbing (clock, reset, check counting,
// watchdog). Include inside a testbench module after declaring nothing else
// named clk, rst_n, checks or failures. WATCHDOG_CYCLES must be defined.
logic clk = 1'b0;
logic rst_n = 1'b0;
int   checks = 0;
int   failures = 0;
always #5 clk = ~clk;

task automatic check(input bit cond, input string what);
  checks++;
  if (!cond) begin
    failures++;
    $display("FAIL: %s", what);
  end
endtask

task automatic finish();
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
endtask

initial begin
  repeat (`WATCHDOG_CYCLES) @(posedge clk);
  failures++;
  $display("FAIL: watchdog expired");
  finish();
end
