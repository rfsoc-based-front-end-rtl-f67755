// Self-checking testbench of data_trigger.
//
// The input stream is valid every cycle and carries its cycle number.
// Sparse random trigger flags (some close enough to overlap) are applied
// for several pre/post settings. A trigger flag at cycle t refers to the
// word that arrives at cycle t + PRE_MAX, so the expected TVALID at cycle c
// is the OR over all triggers of t + PRE_MAX - pre <= c <= t + PRE_MAX +
// post. Every cycle's TVALID and data are compared; merged (retriggered)
// windows must have occurred.
module tb_data_trigger;
  localparam int PRE_MAX = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [127:0] s_tdata, m_tdata;
  logic s_tvalid, m_tvalid;
  logic [31:0] s_tuser, m_tuser;
  logic trigger;
  logic [5:0] pre;
  logic [15:0] post;
  int checks = 0, failures = 0, merged = 0;
  always #4 clk = ~clk;

  data_trigger dut (.*);

  task automatic run(input int p, input int q, input int ncyc);
    bit trg [0:4095];
    int last_t;
    pre = 6'(p); post = 16'(q);
    rst_n = 1'b0; trigger = 0; s_tvalid = 0; s_tdata = '0; s_tuser = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 4096; i++) trg[i] = 0;
    last_t = -1000;
    for (int c = 0; c < ncyc; c++) begin
      bit e;
      s_tdata = 128'(c); s_tuser = 32'(c); s_tvalid = 1'b1;
      trigger = (c < ncyc - 100) && ($urandom_range(0, 39) == 0);
      if (trigger) begin
        if (c - last_t <= p + q) merged++;
        last_t = c;
      end
      trg[c] = trigger;
      #1;
      // expected valid for this cycle
      e = 0;
      for (int t = c - PRE_MAX - q; t <= c - PRE_MAX + p; t++) if (t >= 0 && trg[t]) e = 1;
      checks++;
      if (m_tvalid !== e || (e && (m_tdata[31:0] !== 32'(c) || m_tuser !== 32'(c)))) begin
        failures++;
        if (failures < 10) $display("pre=%0d post=%0d cycle %0d: valid %0d expected %0d", p, q, c, m_tvalid, e);
      end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    run(2, 7, 1500);
    run(0, 0, 1000);
    run(32, 3, 1500);
    run(10, 40, 1500);
    checks++;
    if (merged == 0) begin failures++; $display("no overlapping windows exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
