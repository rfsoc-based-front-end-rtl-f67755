// Self-checking testbench of axis_width_conv.
//
// Random 128-bit frames (2 to 6 words, the last with TKEEP 16'h00FF or
// 16'hFFFF) are sent with random TVALID gaps into a sink with random
// TREADY. The testbench expands every input word into its expected 64-bit
// halves (dropping an upper half with no TKEEP bit set) and compares data,
// TKEEP and TLAST of every output word in order. A burst with TREADY held
// high must run at one output word per cycle.
module tb_axis_width_conv;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [127:0] s_tdata;
  logic [15:0]  s_tkeep;
  logic s_tlast, s_tvalid, s_tready;
  logic [63:0] m_tdata;
  logic [7:0]  m_tkeep;
  logic m_tlast, m_tvalid, m_tready;
  int checks = 0, failures = 0;
  bit fast = 0;
  always #4 clk = ~clk;

  axis_width_conv dut (.*);

  typedef struct { logic [63:0] d; logic [7:0] k; bit l; } half_t;
  half_t exp_q [$];
  int nsent = 0, nrecv = 0, stalls = 0;

  initial begin
    s_tdata = '0; s_tkeep = '0; s_tlast = 0; s_tvalid = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int f = 0; f < 300; f++) begin
      int n;
      n = $urandom_range(2, 6);
      if (f == 250) fast = 1;
      for (int w = 0; w < n; w++) begin
        bit lastw, halfw;
        lastw = (w == n - 1);
        halfw = lastw && ($urandom_range(0, 1) == 1);
        s_tdata = {$urandom, $urandom, $urandom, $urandom};
        s_tkeep = halfw ? 16'h00FF : 16'hFFFF;
        s_tlast = lastw;
        s_tvalid = 1'b1;
        exp_q.push_back('{s_tdata[63:0], 8'hFF, lastw && halfw});
        if (!halfw) exp_q.push_back('{s_tdata[127:64], 8'hFF, lastw});
        do @(posedge clk); while (!s_tready);
        #1;
        if (!fast && $urandom_range(0, 3) == 0) begin
          s_tvalid = 0;
          @(posedge clk); #1;
        end
      end
    end
    s_tvalid = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words never came out", exp_q.size()); end
    checks++;
    if (stalls != 0) begin failures++; $display("%0d idle cycles during the full-rate burst", stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) m_tready <= fast ? 1'b1 : ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin
      half_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        if (m_tdata !== e.d || m_tkeep !== e.k || m_tlast !== e.l) begin
          failures++;
          if (failures < 10) $display("word %0d mismatch: last %0d exp %0d", nrecv, m_tlast, e.l);
        end
      end
      nrecv++;
    end else if (fast && exp_q.size() > 1 && s_tvalid) stalls++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
