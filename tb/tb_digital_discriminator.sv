// Self-checking testbench of digital_discriminator.
//
// Random words of eight signed samples, some with one lane lifted to just
// below, at or above a random threshold, are applied with random TVALID.
// The expected hit, computed in the testbench as "valid and any sample >=
// threshold", is compared one cycle later (the registered latency).
module tb_digital_discriminator;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [127:0] s_tdata;
  logic s_tvalid;
  logic signed [15:0] threshold;
  logic hit;
  int checks = 0, failures = 0;
  int nhit = 0;
  always #4 clk = ~clk;

  digital_discriminator dut (.*);

  initial begin
    bit exp_q;
    s_tdata = '0; s_tvalid = 1'b0; threshold = 16'sd8;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    exp_q = 1'b0;
    for (int c = 0; c < 2000; c++) begin
      bit e;
      threshold = 16'(int'($urandom_range(0, 60)) - 10);
      for (int l = 0; l < 8; l++) s_tdata[l*16 +: 16] = 16'(int'($urandom_range(0, 40)) - 30);
      case ($urandom_range(0, 3))
        0: s_tdata[$urandom_range(0,7)*16 +: 16] = threshold;
        1: s_tdata[$urandom_range(0,7)*16 +: 16] = threshold - 16'sd1;
        2: s_tdata[$urandom_range(0,7)*16 +: 16] = 16'sd2000;
        default: ;
      endcase
      s_tvalid = ($urandom_range(0, 7) != 0);
      e = 1'b0;
      for (int l = 0; l < 8; l++) if ($signed(s_tdata[l*16 +: 16]) >= threshold) e = 1'b1;
      e &= s_tvalid;
      @(posedge clk); #1;
      checks++;
      if (hit !== e) begin
        failures++;
        if (failures < 10) $display("cycle %0d: hit=%0d expected %0d", c, hit, e);
      end
      nhit += e;
    end
    checks++;
    if (nhit < 100) begin failures++; $display("too few hits exercised"); end
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
