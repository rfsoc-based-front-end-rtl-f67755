// Self-checking testbench of axis_fifo (default depth 1024, 77-bit words).
//
// Phase 1: random producer and consumer; every word must come out once, in
// order. Phase 2: the consumer stops until the FIFO reports full
// (s_ready low); exactly DEPTH + 2 words (RAM plus output buffer) must be
// held, `count` must say so, and draining must return them all in order.
// Phase 3: producer and consumer both always ready; the FIFO must pass one
// word per cycle.
module tb_axis_fifo;
  localparam int W = 77, DEPTH = 1024;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] s_data, m_data;
  logic s_valid, s_ready, m_valid, m_ready;
  logic [10:0] count;
  int checks = 0, failures = 0;
  int phase = 1;
  always #4 clk = ~clk;

  axis_fifo dut (.*);

  logic [W-1:0] q [$];
  int nin = 0, nout = 0, p3_out = 0;

  function automatic logic [W-1:0] word(int n);
    return {13'(n), 32'(n * 7919), 32'(~n)};
  endfunction

  always @(negedge clk) if (rst_n) begin
    case (phase)
      1: begin s_valid = ($urandom_range(0, 2) != 0); m_ready = ($urandom_range(0, 2) != 0); end
      2: begin s_valid = 1'b1; m_ready = 1'b0; end
      3: begin s_valid = 1'b0; m_ready = 1'b1; end
      default: begin s_valid = 1'b1; m_ready = 1'b1; end
    endcase
    s_data = word(nin);
  end

  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) begin q.push_back(s_data); nin++; end
    if (m_valid && m_ready) begin
      logic [W-1:0] e;
      checks++;
      if (q.size() == 0) begin failures++; $display("output from empty FIFO"); end
      else begin
        e = q.pop_front();
        if (m_data !== e) begin failures++; if (failures < 10) $display("word %0d wrong", nout); end
      end
      nout++;
      if (phase == 4) p3_out++;
    end
  end

  initial begin
    s_valid = 0; m_ready = 0; s_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (5000) @(posedge clk);
    phase = 3;                       // drain
    repeat (50) @(posedge clk);
    phase = 2;                       // fill
    wait (!s_ready);
    repeat (5) @(posedge clk);
    #1;
    checks += 2;
    if (q.size() != DEPTH + 2) begin failures++; $display("held %0d words, expected %0d", q.size(), DEPTH + 2); end
    if (int'(count) != q.size()) begin failures++; $display("count %0d, held %0d", count, q.size()); end
    phase = 3;
    wait (q.size() == 0);
    repeat (5) @(posedge clk);
    phase = 4;                       // full rate
    repeat (5) @(posedge clk);
    p3_out = 0;
    repeat (500) @(posedge clk);
    checks++;
    if (p3_out < 499) begin failures++; $display("throughput %0d words in 500 cycles", p3_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
