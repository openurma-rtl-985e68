// tb_common.svh: shared testbench scaffolding.
// Declares the clock, active-low reset, check counters and a watchdog, and
// provides CHECK(cond, msg) plus a FINISH task that prints the TB_RESULT line.
// The including module defines WATCHDOG_CYCLES before including this file.
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0;
  int   failures = 0;
  int   cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask
  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    $display("FAIL: watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic reset_dut();
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
  endtask
