// End-to-end testbench of rfsoc_fe_top at its default size (16 channels,
// 56 kB frame buffer per channel, 1024-word output FIFO).
//
// Every channel receives a synthetic h-gain waveform (eight 16-bit samples
// per cycle): baseline noise, random single-photoelectron-like pulses of
// about 40 counts and, on some channels, a large pulse followed by a slow
// negative overshoot. l-gain samples are random. A processor model writes
// the registers over AXI4-lite and runs these phases:
//
//   A  event trigger (discriminator), BLR and moving average on, the DMA
//      sink stalled for a while so the output FIFO fills up
//   B  external trigger only, TTL pulses every 300 cycles
//   C  forced trigger only: three FORCE register writes, three RJ45 pulses
//   D  event trigger, BLR and moving average both bypassed
//   E  event trigger, BLR on, moving average bypassed
//   F  forced trigger with a post time longer than the 56 kB buffer: every
//      channel must drop that event
//   G  event trigger again after an RJ45 system reset of the timestamp
//
// A reference model computes, for each of the four BLR/MA settings, the
// filtered sample stream of every channel from the definitions. Each frame
// leaving the DMA port is reassembled and checked: header and footer
// magic, channel = TID, word count, consecutive sequence numbers, dropped
// count, every sample word against the reference (located through the
// header timestamp; the h-gain path from input to frame buffer takes 37
// cycles), and the l-gain minimum and maximum in the footer. Per-phase
// frame counts check the forced and external triggers, and externally
// triggered frames must carry the same timestamp on all channels.
// Each mechanism (every trigger source, each bypass, retrigger merging,
// buffer overflow, FIFO back-pressure, round-robin switching, timestamp
// clear) is counted, and a mechanism that never occurred counts a failure.
module tb_rfsoc_fe_top;
  import fe_pkg::*;
  localparam int NCH = 16;
  localparam int NW  = 24000;           // input words per channel
  localparam int LAT = 37;              // DSP (3) + delay (34)
  localparam int TM_EVENT_BIT = 0;      // event bit of the trigger source
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
  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, s);
  endtask

  // ---------------- stimulus data ----------------
  shortint raw [NCH][NW*8];             // 16-bit RF-ADC codes
  int      lg  [NCH][NW];               // l-gain pair per word
  shortint ref_out [4][NCH][NW*8];      // cfg index {blr,ma}

  function automatic void make_data();
    for (int ch = 0; ch < NCH; ch++) begin
      int pulse_left = 0;
      for (int n = 0; n < NW*8; n++) begin
        int v;
        v = int'($urandom_range(0, 4)) - 2;
        if ($urandom_range(0, 1999) == 0) pulse_left = 20;
        if (pulse_left > 0) begin
          v += (pulse_left > 10) ? (20 - pulse_left) * 4 : pulse_left * 4;
          pulse_left--;
        end
        if ((ch % 4 == 0) && (n % 40000) >= 3000 && (n % 40000) < 3030) v += 1500;
        if ((ch % 4 == 0) && (n % 40000) >= 3030 && (n % 40000) < 4500) v -= (4500 - (n % 40000)) / 10;
        raw[ch][n] = shortint'(v * 16 + int'($urandom_range(0, 15)));
      end
      for (int w = 0; w < NW; w++) lg[ch][w] = int'($urandom);
    end
  endfunction

  function automatic void make_ref();
    for (int ch = 0; ch < NCH; ch++)
      for (int cfg = 0; cfg < 4; cfg++) begin
        bit be, me;
        int sn, sb;
        int blr [8];
        be = cfg[1]; me = cfg[0];
        sn = 0; sb = 0;
        for (int n = 0; n < NW*8; n++) begin
          int x, b;
          x = int'(raw[ch][n]) >>> 4;
          sn += (x < 0) ? x : 0;
          if (n >= 64) begin
            int xo;
            xo = int'(raw[ch][n-64]) >>> 4;
            sn -= (xo < 0) ? xo : 0;
          end
          b = be ? x - (sn >>> 6) : x;
          sb += b;
          if (n >= 8) sb -= blr[n % 8];
          blr[n % 8] = b;
          ref_out[cfg][ch][n] = shortint'(me ? (sb >>> 3) : b);
        end
      end
  endfunction

  // ---------------- driver ----------------
  int cyc = -1;                       // index of the word now on the inputs
  longint ts_of [NW];                 // DUT timestamp while word c is presented
  int     c_of_ts [longint];
  byte    cfg_of [NW];                // BLR/MA setting, -1 near a change
  byte    phase_of [NW];
  int     cur_cfg = 3;
  int     cur_phase = 0;
  int     cfg_change_at = -100;
  bit     drive_done = 0;

  initial begin
    make_data();
    make_ref();
    for (int ch = 0; ch < NCH; ch++) begin adc_tdata[ch] = '0; lg_data[ch] = '0; end
    adc_tvalid = '0; lg_valid = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < NW; c++) begin
      cyc = c;
      for (int ch = 0; ch < NCH; ch++) begin
        for (int l = 0; l < 8; l++) adc_tdata[ch][l*16 +: 16] = raw[ch][c*8 + l];
        lg_data[ch] = lg[ch][c];
      end
      adc_tvalid = '1; lg_valid = '1;
      ts_of[c] = longint'(dut.ts);
      c_of_ts[longint'(dut.ts)] = c;
      cfg_of[c] = (c - cfg_change_at < 24) ? -1 : byte'(cur_cfg);
      phase_of[c] = byte'(cur_phase);
      @(posedge clk); #1;
    end
    adc_tvalid = '0; lg_valid = '0;
    drive_done = 1;
  end

  // ---------------- processor model ----------------
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

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    #1;
    while (!s_axil_arready) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_axil_arvalid = 0; s_axil_rready = 1;
    @(negedge clk);
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(posedge clk); #1 s_axil_rready = 0;
  endtask

  task automatic set_cfg(input int be, input int me);
    cfg_change_at = cyc;
    cur_cfg = be * 2 + me;
    wr(8'h00, 32'(me * 2 + be));
    cfg_change_at = cyc;
  endtask

  task automatic wait_to(input int c);
    while (cyc < c) @(posedge clk);
  endtask

  bit sink_stall = 0;
  int n_ttl = 0, n_force_reg = 0, n_force_rj = 0, drops_read = 0;

  initial begin
    logic [31:0] d;
    ttl_in = 0; rj45_force = 0; rj45_sysreset = 0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_araddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0;
    wait (rst_n);
    // A: event trigger, defaults, then a long sink stall
    cur_phase = 1;
    wait_to(1500); sink_stall = 1;
    wait_to(3500); sink_stall = 0;
    wait_to(4000);
    // B: external trigger only
    wr(8'h04, 32'h2); cur_phase = 2;
    for (int i = 0; i < 6; i++) begin
      wait_to(4200 + i * 300);
      ttl_in = 1; repeat (5) @(posedge clk); ttl_in = 0;
      n_ttl++;
    end
    wait_to(6200);
    // C: forced only
    wr(8'h04, 32'h4); cur_phase = 3;
    for (int i = 0; i < 3; i++) begin
      wait_to(6400 + i * 200); wr(8'h10, 32'h1); n_force_reg++;
    end
    for (int i = 0; i < 3; i++) begin
      wait_to(7100 + i * 200);
      rj45_force = 1; repeat (4) @(posedge clk); rj45_force = 0;
      n_force_rj++;
    end
    wait_to(7800);
    // D: event, BLR and MA bypassed
    cur_phase = 4;
    wr(8'h04, 32'h1);
    set_cfg(0, 0);
    wait_to(10500);
    // E: BLR on, MA off
    cur_phase = 5;
    set_cfg(1, 0);
    wait_to(13000);
    // F: overflow with a forced event longer than the buffer
    set_cfg(1, 1);
    wr(8'h04, 32'h4);
    wait_to(13150);
    cur_phase = 6;
    wr(8'h0C, 32'd5000);
    wait_to(13300);
    wr(8'h10, 32'h1);
    wait_to(18800);
    cur_phase = 7;
    wr(8'h0C, 32'd7);
    // G: event trigger after a timestamp clear
    wr(8'h04, 32'h1);
    wait_to(19000);
    rj45_sysreset = 1; repeat (4) @(posedge clk); rj45_sysreset = 0;
    wait (drive_done);
    repeat (3000) @(posedge clk);
    for (int ch = 0; ch < NCH; ch++) begin
      rd(8'h80 + 8'(4*ch), d);
      drops_read += int'(d);
      checks++;
      if (d != 32'd1) fail($sformatf("channel %0d dropped count %0d, expected 1", ch, d));
    end
    finish_checks();
  end

  always @(negedge clk) m_axis_tready <= sink_stall ? 1'b0 : ($urandom_range(0, 9) != 0);

  // ---------------- frame checker ----------------
  logic [63:0] fw [$];
  int next_seq [NCH];
  int last_drop [NCH];
  int frames_ph [8][NCH];
  longint ext_ts [NCH][$];
  int n_frames = 0, n_merged = 0, n_words_checked = 0, n_tid_switch = 0, last_tid = -1;
  int n_cfg_frames [4];
  int n_fifo_full = 0, n_ts_clear = 0, n_event_trig = 0;

  initial begin
    for (int ch = 0; ch < NCH; ch++) begin next_seq[ch] = 0; last_drop[ch] = 0; end
    for (int p = 0; p < 8; p++) for (int ch = 0; ch < NCH; ch++) frames_ph[p][ch] = 0;
    for (int i = 0; i < 4; i++) n_cfg_frames[i] = 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (!dut.x_tready) n_fifo_full++;
    if (trig_source[3*1 + TM_EVENT_BIT]) n_event_trig++;
    if (m_axis_tvalid && m_axis_tready) begin
      fw.push_back(m_axis_tdata);
      if (m_axis_tlast) begin
        check_frame(int'(m_axis_tid));
        fw.delete();
      end
    end
  end

  task automatic check_frame(input int tid);
    frame_hdr_t h;
    frame_ftr_t f;
    int nw, c0, cfg, ph, mn, mx;
    n_frames++;
    if (last_tid >= 0 && tid != last_tid) n_tid_switch++;
    last_tid = tid;
    checks++;
    if (fw.size() < 5 || (fw.size() - 3) % 2 != 0) begin fail($sformatf("frame of %0d words", fw.size())); return; end
    h = {fw[1], fw[0]};
    f = fw[fw.size()-1];
    nw = (fw.size() - 3) / 2;
    checks++;
    if (h.magic != HDR_MAGIC || int'(h.channel) != tid || int'(h.words) != nw)
      fail($sformatf("bad header on channel %0d", tid));
    checks++;
    if (f.magic != FTR_MAGIC || int'(f.channel) != tid || int'(f.words) != nw)
      fail($sformatf("bad footer on channel %0d", tid));
    checks++;
    if (int'(h.seq_no) != next_seq[tid] || int'(h.dropped) < last_drop[tid])
      fail($sformatf("channel %0d sequence %0d expected %0d", tid, h.seq_no, next_seq[tid]));
    next_seq[tid] = int'(h.seq_no) + 1;
    last_drop[tid] = int'(h.dropped);
    if (h.timestamp < LAT) return;      // first words after a timestamp clear
    if (!c_of_ts.exists(longint'(h.timestamp) - LAT)) begin
      checks++; fail($sformatf("channel %0d: timestamp %0d matches no input word", tid, h.timestamp));
      return;
    end
    c0 = c_of_ts[longint'(h.timestamp) - LAT];
    ph = phase_of[c0];
    frames_ph[ph][tid]++;
    if (ph == 2) ext_ts[tid].push_back(h.timestamp);
    if (ph == 7 && h.timestamp < 64'd10000) n_ts_clear++;
    if (nw > 10 && ph != 6) n_merged++;
    if (ph != 6) begin
      checks++;
      if (nw < 10) fail($sformatf("channel %0d: frame of %0d words, window is 10", tid, nw));
    end
    // samples
    cfg = cfg_of[c0];
    if (cfg >= 0 && cfg_of[c0 + nw - 1] == cfg) begin
      n_cfg_frames[cfg]++;
      for (int w = 0; w < nw; w++) begin
        logic [127:0] got;
        got = {fw[2 + 2*w + 1], fw[2 + 2*w]};
        for (int l = 0; l < 8; l++) begin
          checks++;
          if ($signed(got[l*16 +: 16]) != ref_out[cfg][tid][(c0 + w)*8 + l]) begin
            fail($sformatf("channel %0d word %0d lane %0d: %0d expected %0d (cfg %0d)", tid, c0 + w, l,
                           $signed(got[l*16 +: 16]), ref_out[cfg][tid][(c0 + w)*8 + l], cfg));
          end
        end
        n_words_checked++;
      end
    end
    // l-gain summary
    mn = 32767; mx = -32768;
    for (int w = 0; w < nw; w++) begin
      int a, b;
      a = int'($signed(lg[tid][c0 + w][15:0]));
      b = int'($signed(lg[tid][c0 + w][31:16]));
      mn = (a < mn) ? a : mn; mn = (b < mn) ? b : mn;
      mx = (a > mx) ? a : mx; mx = (b > mx) ? b : mx;
    end
    checks++;
    if (int'($signed(f.lg_min)) != mn || int'($signed(f.lg_max)) != mx)
      fail($sformatf("channel %0d: l-gain min/max %0d/%0d expected %0d/%0d", tid,
                     $signed(f.lg_min), $signed(f.lg_max), mn, mx));
  endtask

  task automatic mech(input string name, input int n);
    checks++;
    $display("  %-28s %0d", name, n);
    if (n == 0) fail($sformatf("mechanism never exercised: %s", name));
  endtask

  task automatic finish_checks();
    for (int ch = 0; ch < NCH; ch++) begin
      checks += 3;
      if (frames_ph[2][ch] != n_ttl) fail($sformatf("channel %0d: %0d external frames, expected %0d", ch, frames_ph[2][ch], n_ttl));
      if (frames_ph[3][ch] != n_force_reg + n_force_rj)
        fail($sformatf("channel %0d: %0d forced frames, expected %0d", ch, frames_ph[3][ch], n_force_reg + n_force_rj));
      if (frames_ph[6][ch] != 0) fail($sformatf("channel %0d: oversized event was not dropped", ch));
      checks++;
      if (ext_ts[ch].size() != ext_ts[0].size()) fail("external frames differ between channels");
      else for (int i = 0; i < ext_ts[ch].size(); i++) if (ext_ts[ch][i] != ext_ts[0][i]) fail("external timestamps differ");
    end
    $display("frames %0d, sample words checked %0d", n_frames, n_words_checked);
    mech("event-hit triggers (ch 1)", n_event_trig);
    mech("external (TTL) triggers", n_ttl * int'(frames_ph[2][0] == n_ttl));
    mech("forced by register", n_force_reg);
    mech("forced by RJ45", n_force_rj);
    mech("frames BLR+MA", n_cfg_frames[3]);
    mech("frames BLR and MA bypassed", n_cfg_frames[0]);
    mech("frames BLR only", n_cfg_frames[2]);
    mech("merged retriggered windows", n_merged);
    mech("buffer overflow drops", drops_read);
    mech("FIFO back-pressure cycles", n_fifo_full);
    mech("round-robin channel switches", n_tid_switch);
    mech("timestamp clears", n_ts_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
