// Self-checking testbench of stream_delay.
//
// Random data, side data and valid are pushed every cycle into the delay
// line at its default depth (34 cycles); the output of each cycle must
// equal the input applied exactly DEPTH cycles earlier, and the first
// valid output must appear DEPTH cycles after the first valid input.
module tb_stream_delay;
  localparam int DEPTH = 34;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [127:0] s_tdata, m_tdata;
  logic s_tvalid, m_tvalid;
  logic [31:0] s_tuser, m_tuser;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  stream_delay dut (.*);

  logic [127:0] hd [0:2047];
  logic [31:0]  hu [0:2047];
  logic         hv [0:2047];

  initial begin
    int first_out;
    s_tdata = '0; s_tvalid = 0; s_tuser = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    first_out = -1;
    for (int c = 0; c < 2000; c++) begin
      if (c >= DEPTH) begin
        checks++;
        if (m_tvalid !== hv[c-DEPTH] || (hv[c-DEPTH] && (m_tdata !== hd[c-DEPTH] || m_tuser !== hu[c-DEPTH]))) begin
          failures++;
          if (failures < 10) $display("cycle %0d: output differs from input of cycle %0d", c, c-DEPTH);
        end
      end else begin
        checks++;
        if (m_tvalid !== 1'b0) begin failures++; $display("valid before the delay elapsed at %0d", c); end
      end
      if (m_tvalid && first_out < 0) first_out = c;
      s_tdata = {$urandom, $urandom, $urandom, $urandom};
      s_tuser = $urandom;
      s_tvalid = (c == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
      hd[c] = s_tdata; hu[c] = s_tuser; hv[c] = s_tvalid;
      @(posedge clk); #1;
    end
    checks++;
    if (first_out != DEPTH) begin failures++; $display("latency %0d, expected %0d", first_out, DEPTH); end
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
