// Shared test-bench scaffolding: a 100 MHz clock, an active-low reset held
// for four cycles, check counters, a CHECK macro that counts a failure and
// prints the message when its condition is false, and a watchdog that ends
// the run as a failure after WD_CYCLES cycles. Include inside the module
// after declaring `localparam int WD_CYCLES`.
logic clk = 1'b0;
logic rst_n = 1'b0;
int   checks = 0;
int   failures = 0;
always #5 clk = ~clk;
initial begin
  repeat (4) @(posedge clk);
  rst_n <= 1'b1;
end
initial begin
  repeat (WD_CYCLES) @(posedge clk);
  failures++;
  $display("watchdog expired after %0d cycles", WD_CYCLES);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s", msg); end end
`define FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
