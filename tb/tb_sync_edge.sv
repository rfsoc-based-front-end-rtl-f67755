// Self-checking testbench of sync_edge.
//
// Applies random level changes (held for 1 to 8 cycles) between clock
// edges. A testbench model delays the level by the two synchroniser
// stages; the synchronised level and a one-cycle pulse on each of its
// rising edges, three cycles after the input rose, are checked every cycle.
module tb_sync_edge;
  logic clk = 1'b0, rst_n = 1'b0;
  logic async_in, level, pulse;
  int checks = 0, failures = 0, npulse = 0;
  always #4 clk = ~clk;

  sync_edge dut (.*);

  initial begin
    bit h [0:7];
    async_in = 1'b0;
    for (int i = 0; i < 8; i++) h[i] = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 3000; c++) begin
      if ($urandom_range(0, 3) == 0) async_in = ~async_in;
      @(posedge clk); #1;
      for (int i = 7; i > 0; i--) h[i] = h[i-1];
      h[0] = async_in;        // sampled by the first stage at this edge
      checks += 2;
      if (level !== h[1]) begin failures++; if (failures < 10) $display("level mismatch at %0d", c); end
      if (pulse !== (h[2] & ~h[3])) begin failures++; if (failures < 10) $display("pulse mismatch at %0d", c); end
      npulse += pulse;
    end
    checks++;
    if (npulse < 100) begin failures++; $display("too few pulses: %0d", npulse); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
