// Self-checking testbench of lgain_adc_if.
//
// Random l-gain sample pairs with random valid are applied; each output
// must equal the input of LAT = 3 cycles earlier, which is the h-gain DSP
// latency the interface aligns to.
module tb_lgain_adc_if;
  localparam int LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] lg_data, m_data;
  logic lg_valid, m_valid;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  lgain_adc_if dut (.*);

  logic [31:0] hd [0:1023];
  logic        hv [0:1023];

  initial begin
    lg_data = '0; lg_valid = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 1000; c++) begin
      checks++;
      if (c >= LAT) begin
        if (m_valid !== hv[c-LAT] || m_data !== hd[c-LAT]) begin
          failures++;
          if (failures < 10) $display("cycle %0d mismatch", c);
        end
      end else if (m_valid !== 1'b0) failures++;
      lg_data = $urandom;
      lg_valid = ($urandom_range(0, 3) != 0);
      hd[c] = lg_data; hv[c] = lg_valid;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
