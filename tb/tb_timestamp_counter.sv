// Self-checking testbench of timestamp_counter.
//
// Checks that the count advances by one per clock cycle from reset, and
// that a one-cycle sync_clear restarts it from zero on the next cycle.
module tb_timestamp_counter;
  logic clk = 1'b0, rst_n = 1'b0;
  logic sync_clear;
  logic [63:0] count;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  timestamp_counter dut (.*);

  initial begin
    longint exp;
    sync_clear = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    exp = 0;
    for (int c = 0; c < 3000; c++) begin
      checks++;
      if (count !== 64'(exp)) begin failures++; if (failures < 10) $display("cycle %0d: %0d exp %0d", c, count, exp); end
      sync_clear = ($urandom_range(0, 499) == 0) || (c == 1500);
      @(posedge clk); #1;
      exp = sync_clear ? 0 : exp + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
