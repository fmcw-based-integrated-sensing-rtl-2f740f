// Common testbench scaffolding: clock, reset, check counters, the result
// line and a watchdog. The including module defines WATCHDOG (cycles).

  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;
  // a real falling edge, so that the asynchronous resets act
  initial #1 rst_n = 1'b0;

  int checks   = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  localparam real PI = 3.14159265358979;

  // wrap a phase in turns to [-0.5, 0.5)
  function automatic real wrap(input real t);
    return t - $floor(t + 0.5);
  endfunction
