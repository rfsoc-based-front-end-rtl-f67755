// Self-checking testbench of pl_regs.
//
// Drives the AXI4-lite slave like a processor would. Checks reset values
// (blr_en = ma_en = 1, trigger mode 1, pre 2, post 7, thresholds 8), that
// writes reach the configuration outputs and read back, that byte strobes
// are honoured, that a FORCE write produces exactly one forced pulse, that
// the drop counters read back at 0x80 + 4*ch, and that unmapped addresses
// read zero.
module tb_pl_regs;
  import fe_pkg::*;
  localparam int NCH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  fe_cfg_t cfg;
  logic signed [15:0] threshold [NCH];
  logic force_pulse;
  logic [15:0] dropped [NCH];
  int checks = 0, failures = 0, npulse = 0;
  always #4 clk = ~clk;

  pl_regs dut (.*);

  always @(posedge clk) npulse += force_pulse;

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] st = 4'hF);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_wstrb = st; s_awvalid = 1; s_wvalid = 1;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    @(negedge clk);
    while (!s_bvalid) @(negedge clk);
    @(posedge clk); #1 s_bready = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_arvalid = 0; s_rready = 1;
    @(negedge clk);
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(posedge clk); #1 s_rready = 0;
  endtask

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0h expected %0h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    for (int c = 0; c < NCH; c++) dropped[c] = 16'(c * 3 + 1);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    chk("reset blr_en", cfg.blr_en, 1); chk("reset ma_en", cfg.ma_en, 1);
    chk("reset mode", cfg.trig_mode, 1); chk("reset pre", cfg.pre, 2); chk("reset post", cfg.post, 7);
    for (int c = 0; c < NCH; c++) chk("reset threshold", threshold[c], 8);
    wr(8'h00, 32'h2); chk("blr_en", cfg.blr_en, 0); chk("ma_en", cfg.ma_en, 1);
    rd(8'h00, d); chk("read CTRL", d, 2);
    wr(8'h04, 32'h6); chk("mode", cfg.trig_mode, 6); rd(8'h04, d); chk("read MODE", d, 6);
    wr(8'h08, 32'd17); chk("pre", cfg.pre, 17);
    wr(8'h0C, 32'h1234); chk("post", cfg.post, 16'h1234);
    wr(8'h0C, 32'hAB00, 4'b0010); chk("post byte 1", cfg.post, 16'hAB34);
    rd(8'h0C, d); chk("read POST", d, 32'hAB34);
    for (int c = 0; c < NCH; c++) wr(8'h40 + 8'(4*c), 32'(c * 5 - 20));
    for (int c = 0; c < NCH; c++) begin
      chk("threshold", threshold[c], c * 5 - 20);
      rd(8'h40 + 8'(4*c), d); chk("read threshold", int'($signed(d)), c * 5 - 20);
      rd(8'h80 + 8'(4*c), d); chk("read dropped", d, c * 3 + 1);
    end
    npulse = 0;
    wr(8'h10, 32'h1);
    repeat (3) @(posedge clk);
    chk("force pulses", npulse, 1);
    wr(8'h10, 32'h0);
    repeat (3) @(posedge clk);
    chk("no force pulse on 0", npulse, 1);
    rd(8'hF0, d); chk("unmapped", d, 0);
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
