// Trigger-rate workloads on the full-size design (16 channels, default
// parameters), driven through the front-panel TTL input with the trigger
// mode set to "external only" and the default 80 ns window (pre 2, post 7).
// The DMA sink is always ready. The first trigger comes 200 cycles after
// reset, once the pre-trigger delay line holds valid samples (a trigger
// earlier than that gets a shorter record).
//
//   1. 32 kHz trigger rate (one trigger every 3906 cycles), 20 triggers:
//      the highest rate at which the complete readout was shown to keep up.
//   2. 25 kHz (every 5000 cycles), 20 triggers: the dark-hit rate a
//      software trigger must record on every channel.
//      For both: every trigger must give one 184-byte frame per channel,
//      nothing may be dropped, and the output rate must equal
//      rate x 16 x 184 bytes (753.7 and 588.8 Mbit/s).
//   3. Afterpulse burst: 1 MHz (every 125 cycles) for 1 ms on all 16
//      channels at once. A frame costs 24 output cycles (23 words of 64 bits
//      and one arbitration cycle), so the merged stream drains 125/24 = 5.2
//      of the 16 frames arriving per microsecond; each channel's buffer then
//      grows by about (16 - 5.2) x 11 / 16 = 7.4 words per microsecond and
//      its 3584 words are full after about 0.48 ms. Checked: no drop before
//      0.40 ms, the first drop before 0.60 ms, and delivered + dropped frames
//      = 16000.
module tb_workload_rates;
  import fe_pkg::*;
  localparam int NCH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [127:0] adc_tdata [NCH];
  logic [NCH-1:0] adc_tvalid, lg_valid;
  logic [31:0] lg_data [NCH];
  logic ttl_in, rj45_force, rj45_sysreset;
  logic [7:0] s_axil_awaddr, s_axil_araddr;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready, s_axil_bvalid, s_axil_bready;
  logic s_axil_arvalid, s_axil_arready, s_axil_rvalid, s_axil_rready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0] s_axil_wstrb;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic [63:0] m_axis_tdata;
  logic [7:0] m_axis_tkeep;
  logic m_axis_tlast, m_axis_tvalid, m_axis_tready;
  logic [3:0] m_axis_tid;
  logic [NCH-1:0] trigger, overflow;
  logic [3*NCH-1:0] trig_source;
  logic [10:0] fifo_count;

  rfsoc_fe_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // output accounting
  longint bytes = 0, frames = 0, fbytes = 0, bad_size = 0, drops = 0;
  longint first_drop = -1;
  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && m_axis_tready) begin
      fbytes += $countones(m_axis_tkeep);
      if (m_axis_tlast) begin
        frames++;
        bytes += fbytes;
        if (fbytes != 184) begin bad_size++; if (bad_size < 4) $display("size %0d at %0d tid %0d", fbytes, cycle, m_axis_tid); end
        fbytes = 0;
      end
    end
    if (overflow != '0) begin
      drops += $countones(overflow);
      if (first_drop < 0) first_drop = cycle;
    end
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_wdata = d; s_axil_wstrb = 4'hF; s_axil_awvalid = 1; s_axil_wvalid = 1;
    #1;
    while (!(s_axil_awready && s_axil_wready)) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1;
    @(negedge clk);
    while (!s_axil_bvalid) @(negedge clk);
    @(posedge clk); #1 s_axil_bready = 0;
  endtask

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Run n TTL triggers every `period` cycles, then let the output drain.
  task automatic run(input int period, input int n, input int drain, output longint dur);
    longint t0;
    t0 = cycle;
    for (int i = 0; i < n; i++) begin
      @(negedge clk) ttl_in = 1'b1;
      repeat (3) @(negedge clk);
      ttl_in = 1'b0;
      repeat (period - 4) @(negedge clk);
    end
    dur = cycle - t0;
    repeat (drain) @(negedge clk);
  endtask

  initial begin
    longint dur, b0, f0;
    real mbps;
    for (int ch = 0; ch < NCH; ch++) begin adc_tdata[ch] = '0; lg_data[ch] = 32'h0001_FFFF; end
    adc_tvalid = '1; lg_valid = '1;
    ttl_in = 0; rj45_force = 0; rj45_sysreset = 0; m_axis_tready = 1;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    wr(8'h04, 32'h2);                 // external trigger only
    repeat (200) @(negedge clk);

    b0 = bytes; f0 = frames;
    run(3906, 20, 20000, dur);
    mbps = real'(bytes - b0) * 8.0 / (real'(dur) * 8.0e-9) / 1.0e6;
    $display("32 kHz: %0d frames, %0d bytes, %.1f Mbit/s", frames - f0, bytes - b0, mbps);
    chk("32 kHz: one frame per channel per trigger", frames - f0 == 20 * NCH);
    chk("32 kHz: output rate 753.7 Mbit/s within 1%", mbps > 746.0 && mbps < 761.3);

    b0 = bytes; f0 = frames;
    run(5000, 20, 20000, dur);
    mbps = real'(bytes - b0) * 8.0 / (real'(dur) * 8.0e-9) / 1.0e6;
    $display("25 kHz: %0d frames, %0d bytes, %.1f Mbit/s", frames - f0, bytes - b0, mbps);
    chk("25 kHz: one frame per channel per trigger", frames - f0 == 20 * NCH);
    chk("25 kHz: output rate 588.8 Mbit/s within 1%", mbps > 582.9 && mbps < 594.7);
    chk("no frame dropped at 32 and 25 kHz", drops == 0);
    chk("every frame 184 bytes", bad_size == 0);

    b0 = bytes; f0 = frames;
    first_drop = -1;
    begin
      longint t0;
      t0 = cycle;
      run(125, 1000, 150000, dur);
      $display("1 MHz burst: %0d frames delivered, %0d dropped, first drop after %.3f ms",
               frames - f0, drops, real'(first_drop - t0) * 8.0e-6);
      chk("burst: drops occur", drops > 0);
      chk("burst: first drop between 0.40 and 0.60 ms",
          first_drop > 0 && real'(first_drop - t0) * 8.0e-6 > 0.40 && real'(first_drop - t0) * 8.0e-6 < 0.60);
      chk("burst: delivered + dropped = 16000", (frames - f0) + drops == 16000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
