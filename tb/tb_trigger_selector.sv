// Self-checking testbench of trigger_selector.
//
// Random combinations of the three hit flags and of the trigger-mode mask
// are applied; the trigger flag and the source bits are compared, one
// cycle later, with the OR of the enabled flags computed here. Each source
// must have fired a trigger on its own at least once.
module tb_trigger_selector;
  logic clk = 1'b0, rst_n = 1'b0;
  logic event_hit, external_hit, forced;
  logic [2:0] mode;
  logic trigger;
  logic [2:0] source;
  int checks = 0, failures = 0;
  int solo [3] = '{0, 0, 0};
  always #4 clk = ~clk;

  trigger_selector dut (.*);

  initial begin
    event_hit = 0; external_hit = 0; forced = 0; mode = 3'b001;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 2000; c++) begin
      logic [2:0] f, e;
      f = 3'($urandom_range(0, 7));
      {forced, external_hit, event_hit} = f;
      mode = 3'($urandom_range(0, 7));
      e = f & mode;
      @(posedge clk); #1;
      checks += 2;
      if (trigger !== (|e)) begin failures++; if (failures < 10) $display("trigger mismatch %0d", c); end
      if (source !== e) begin failures++; if (failures < 10) $display("source mismatch %0d", c); end
      for (int i = 0; i < 3; i++) if (e == 3'(1 << i) && trigger) solo[i]++;
    end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (solo[i] == 0) begin failures++; $display("source %0d never triggered alone", i); end
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
