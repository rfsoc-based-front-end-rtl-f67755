// Discriminator threshold scan on the full-size design (16 channels,
// default parameters), after the scan used to qualify the discriminator:
// identical test pulses with 20 ns rise and 20 ns fall and a height of
// 40 ADC counts (about one photoelectron) are injected, and the hit rate is
// recorded as a function of threshold.
//
// Channel c gets threshold 28 + c, so one pass scans 28..43 counts in
// parallel. The trigger mode is "event only" with the default 80 ns window.
// Each pass injects PULSES pulses into all channels, one every 250 cycles
// (the bench setup used 1 kHz; the spacing only has to exceed the event
// length and does not change the result), starting at a random sample
// within the 8-sample word. The waveform has no noise, so the expected
// count is exact: PULSES frames on a channel whose threshold is at or below
// the peak of the filtered pulse and none above. That peak is computed
// here from the pulse shape and the filter definitions: 40 counts with the
// moving average bypassed, floor(max 8-sample sum / 8) = 36 with it.
// Pass 1 runs with BLR and moving average on (the default), pass 2 with
// the moving average bypassed. A pulse is above threshold in several
// consecutive words, and the retriggers extend one window, so each frame
// must be one event of at least the 80 ns window (184 bytes or more,
// 24 + 16 x words).
module tb_workload_threshold_scan;
  import fe_pkg::*;
  localparam int NCH    = 16;
  localparam int PULSES = 25;
  localparam int PERIOD = 250;
  localparam int THR0   = 28;
  localparam int AMP    = 40;     // pulse height, ADC counts
  localparam int RISE   = 20;     // samples (ns)
  localparam int FALL   = 20;

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

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // frames per channel, and frames of the wrong size
  int nframes [NCH];
  int fbytes = 0, bad_size = 0;
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    fbytes += $countones(m_axis_tkeep);
    if (m_axis_tlast) begin
      nframes[m_axis_tid]++;
      if (fbytes < 184 || (fbytes - 24) % 16 != 0) bad_size++;
      fbytes = 0;
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

  // triangular test pulse, sample k after its start
  function automatic int pulse(input int k);
    if (k < 0 || k > RISE + FALL) return 0;
    if (k <= RISE) return AMP * k / RISE;
    return AMP * (RISE + FALL - k) / FALL;
  endfunction

  // peak of the filtered pulse, from the definitions
  function automatic int peak(input bit ma);
    int best = 0, s;
    for (int n = 0; n <= RISE + FALL + 8; n++) begin
      if (ma) begin
        s = 0;
        for (int k = 0; k < 8; k++) s += pulse(n - k);
        s = s >>> 3;
      end else s = pulse(n);
      if (s > best) best = s;
    end
    return best;
  endfunction

  // one pass: PULSES pulses on every channel, then drain
  task automatic pass(input bit ma);
    int off, pk;
    for (int c = 0; c < NCH; c++) nframes[c] = 0;
    for (int p = 0; p < PULSES; p++) begin
      off = int'($urandom_range(7));
      for (int w = 0; w < PERIOD; w++) begin
        @(negedge clk);
        for (int c = 0; c < NCH; c++)
          for (int l = 0; l < 8; l++)
            adc_tdata[c][16*l +: 16] = 16'(pulse(8 * w + l - off) << 4);
      end
    end
    repeat (3000) @(negedge clk);
    pk = peak(ma);
    $display("moving average %s: filtered peak %0d counts", ma ? "on " : "off", pk);
    for (int c = 0; c < NCH; c++) begin
      $display("  threshold %0d: %0d hits of %0d", THR0 + c, nframes[c], PULSES);
      chk($sformatf("ma=%0d threshold %0d: hit count", ma, THR0 + c),
          nframes[c] == ((THR0 + c <= pk) ? PULSES : 0));
    end
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) begin adc_tdata[c] = '0; lg_data[c] = '0; nframes[c] = 0; end
    adc_tvalid = '1; lg_valid = '1;
    ttl_in = 0; rj45_force = 0; rj45_sysreset = 0; m_axis_tready = 1;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < NCH; c++) wr(8'(8'h40 + 4 * c), 32'(THR0 + c));
    repeat (200) @(negedge clk);
    pass(1'b1);
    wr(8'h00, 32'h1);                 // BLR on, moving average bypassed
    repeat (50) @(negedge clk);
    pass(1'b0);
    chk("the scan crosses the peak in both passes", peak(1'b1) > THR0 && peak(1'b0) < THR0 + NCH - 1);
    chk("every frame one event of at least 184 bytes", bad_size == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
