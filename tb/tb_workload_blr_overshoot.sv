// Baseline restoration after a large PMT pulse, on the full-size design
// (16 channels, default parameters).
//
// Each channel sees a saturating muon-like pulse (50 ns at full scale),
// followed by an overshoot that starts at -A_c counts and decays with a
// 10 us time constant, A_c = 20 + 10c (20..170 counts on channels 0..15).
// Riding on the overshoot come NPE single-photoelectron pulses (40 counts,
// 20 ns rise, 20 ns fall), one every microsecond from 1 us after the muon.
// The trigger is the discriminator at the default threshold of 8 counts.
//
// The run is made twice: with BLR and moving average on (the default) and
// with BLR bypassed. A model here computes the filtered waveform from the
// definitions (64-sample mean of the negative part subtracted, then an
// 8-sample mean, both floored) and from it the number of photoelectron
// pulses that reach the threshold. Pulses are 1 us apart, so each one that
// does gives exactly one frame; with the muon's own frame the expected
// frame count of a channel is 1 + that number. At the end of a run the
// input returns abruptly from the remaining overshoot to zero; with BLR on
// that step is itself a positive excursion of a quarter of the overshoot
// and triggers once where it reaches the threshold, so the model covers
// that tail too and adds its frame. The model must also show that nothing
// else between the pulses reaches the threshold. Checked: the
// frame count of every channel in both runs, that with BLR every pulse is
// found on every channel, and that without BLR the deeper overshoots hide
// pulses (fewer found in total).
module tb_workload_blr_overshoot;
  import fe_pkg::*;
  localparam int NCH   = 16;
  localparam int NPE   = 12;
  localparam int T0    = 800;            // muon start, samples
  localparam int MULEN = 50;
  localparam int PE0   = T0 + 1000;      // first photoelectron pulse
  localparam int PEGAP = 1000;
  localparam int NS    = PE0 + NPE * PEGAP + 2000;   // samples per run
  localparam int NWD   = NS / 8;
  localparam int NM    = NS + 512;       // modelled samples: run + tail
  localparam int THR   = 8;

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

  int nframes [NCH];
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready && m_axis_tlast)
    nframes[m_axis_tid]++;

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

  function automatic int pe(input int k);
    if (k < 0 || k > 40) return 0;
    return (k <= 20) ? 2 * k : 2 * (40 - k);
  endfunction

  // input waveform of channel c, in 12-bit counts
  function automatic int wave(input int c, input int n);
    int v;
    if (n < T0 || n >= NS) return 0;
    if (n < T0 + MULEN) return 2047;
    v = -int'($rtoi(real'(20 + 10 * c) * $exp(-real'(n - T0 - MULEN) / 10000.0) + 0.5));
    for (int p = 0; p < NPE; p++) v += pe(n - PE0 - p * PEGAP);
    return v;
  endfunction

  int x [NM];
  int y [NM];

  // filtered waveform of channel c, BLR on or off, moving average on
  task automatic model(input int c, input bit blr);
    int neg, b, s;
    int r [NM];
    for (int n = 0; n < NM; n++) x[n] = wave(c, n);
    neg = 0;
    for (int n = 0; n < NM; n++) begin
      neg += (x[n] < 0) ? x[n] : 0;
      if (n >= 64) neg -= (x[n-64] < 0) ? x[n-64] : 0;
      b = neg >>> 6;
      r[n] = blr ? x[n] - b : x[n];
    end
    s = 0;
    for (int n = 0; n < NM; n++) begin
      s += r[n];
      if (n >= 8) s -= r[n-8];
      y[n] = s >>> 3;
    end
  endtask

  // expected frames: muon + pulses reaching THR + the tail (see header);
  // also flags stray hits elsewhere
  task automatic expect_frames(input int c, input bit blr, output int nf, output int npe, output bit stray);
    int m;
    bit tail;
    bit in_pulse;
    model(c, blr);
    npe = 0; stray = 1'b0;
    for (int p = 0; p < NPE; p++) begin
      m = -100000;
      for (int n = PE0 + p * PEGAP - 8; n < PE0 + p * PEGAP + 56; n++) if (y[n] > m) m = y[n];
      if (m >= THR) npe++;
    end
    tail = 1'b0;
    for (int n = NS; n < NM; n++) if (y[n] >= THR) tail = 1'b1;
    for (int n = 0; n < NS; n++) begin
      in_pulse = (n >= T0 && n < T0 + MULEN + 16);
      for (int p = 0; p < NPE; p++)
        if (n >= PE0 + p * PEGAP - 8 && n < PE0 + p * PEGAP + 56) in_pulse = 1'b1;
      if (!in_pulse && y[n] >= THR) stray = 1'b1;
    end
    nf = 1 + npe + int'(tail);
  endtask

  task automatic run(input bit blr, output int found);
    int nf, npe;
    bit stray;
    for (int c = 0; c < NCH; c++) nframes[c] = 0;
    for (int w = 0; w < NWD; w++) begin
      @(negedge clk);
      for (int c = 0; c < NCH; c++)
        for (int l = 0; l < 8; l++)
          adc_tdata[c][16*l +: 16] = 16'(wave(c, 8 * w + l) << 4);
    end
    for (int c = 0; c < NCH; c++) adc_tdata[c] = '0;
    // 16 channels x one frame per microsecond is more than the merged
    // output carries (24 cycles per frame), so frames queue in the buffers
    // and the drain has to outlast them
    repeat (8000) @(negedge clk);
    found = 0;
    for (int c = 0; c < NCH; c++) begin
      expect_frames(c, blr, nf, npe, stray);
      found += npe;
      $display("BLR %s, overshoot %3d: %0d of %0d pulses found, %0d frames (expected %0d)",
               blr ? "on " : "off", 20 + 10 * c, npe, NPE, nframes[c], nf);
      chk($sformatf("blr=%0d ch %0d: frame count", blr, c), nframes[c] == nf);
      chk($sformatf("blr=%0d ch %0d: no hit between pulses in the model", blr, c), !stray);
      if (blr) chk($sformatf("ch %0d: every pulse found with BLR", c), npe == NPE);
    end
  endtask

  initial begin
    int found_on, found_off;
    for (int c = 0; c < NCH; c++) begin adc_tdata[c] = '0; lg_data[c] = '0; nframes[c] = 0; end
    adc_tvalid = '1; lg_valid = '1;
    ttl_in = 0; rj45_force = 0; rj45_sysreset = 0; m_axis_tready = 1;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (100) @(negedge clk);
    run(1'b1, found_on);
    wr(8'h00, 32'h2);                 // BLR bypassed, moving average on
    repeat (100) @(negedge clk);
    run(1'b0, found_off);
    $display("pulses found: %0d with BLR, %0d without, of %0d", found_on, found_off, NCH * NPE);
    chk("BLR recovers pulses hidden by the overshoot", found_off < found_on);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
