// Self-checking testbench of frame_generator.
//
// Two instances see the same gated input: events (runs of TVALID high) of
// 1 to 40 words separated by gaps of 1 to 30 cycles, every word carrying
// random samples and two random l-gain samples, and a timestamp equal to
// the cycle number.
//
//  * u_big has the default 56 kB buffer and a sink that is ready 3 cycles
//    in 4. Every event must come out as one frame: header (magic, channel,
//    word count, sequence, dropped = 0, timestamp of the first word), the
//    words unchanged, and the footer (magic, channel, l-gain min/max, word
//    count) with TKEEP 00FF and TLAST. The expected frames are built by the
//    testbench from the stimulus.
//  * u_small has a 64-word buffer and a sink ready 1 cycle in 12, so the
//    buffer overflows. Each frame it sends must be an exact copy of one of
//    the events, in order; the header's dropped count must equal the number
//    of events skipped before it, and sent + dropped must equal the number
//    of events. Overflow must have happened.
module tb_frame_generator;
  import fe_pkg::*;
  localparam int NEV = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [127:0] s_tdata;
  logic s_tvalid;
  logic [31:0] s_tuser;
  logic [63:0] timestamp;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  logic [127:0] b_tdata, s2_tdata;
  logic [15:0]  b_tkeep, s2_tkeep, b_dropped, s2_dropped;
  logic b_tlast, b_tvalid, b_tready, b_ovf;
  logic s2_tlast, s2_tvalid, s2_tready, s2_ovf;

  frame_generator #(.CH(5)) u_big (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tuser, .timestamp,
    .m_tdata(b_tdata), .m_tkeep(b_tkeep), .m_tlast(b_tlast), .m_tvalid(b_tvalid), .m_tready(b_tready),
    .dropped(b_dropped), .overflow(b_ovf));

  frame_generator #(.DEPTH(64), .DESC_DEPTH(4), .CH(9)) u_small (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tuser, .timestamp,
    .m_tdata(s2_tdata), .m_tkeep(s2_tkeep), .m_tlast(s2_tlast), .m_tvalid(s2_tvalid), .m_tready(s2_tready),
    .dropped(s2_dropped), .overflow(s2_ovf));

  // Stimulus record
  int            ev_len [NEV];
  longint        ev_ts  [NEV];
  logic [127:0]  ev_w   [NEV][40];
  int            ev_min [NEV], ev_max [NEV];
  bit            stim_done = 0;

  // ---------------- stimulus ----------------
  initial begin
    s_tdata = '0; s_tvalid = 0; s_tuser = '0; timestamp = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int e = 0; e < NEV; e++) begin
      int gap;
      ev_len[e] = (e % 10 == 0) ? 40 : int'($urandom_range(1, 12));
      ev_min[e] = 32767; ev_max[e] = -32768;
      for (int w = 0; w < ev_len[e]; w++) begin
        logic signed [15:0] a, b;
        s_tdata = {$urandom, $urandom, $urandom, $urandom};
        a = 16'($urandom); b = 16'($urandom);
        s_tuser = {b, a};
        if (w == 0) ev_ts[e] = longint'(timestamp);
        if (int'(a) < ev_min[e]) ev_min[e] = int'(a);
        if (int'(b) < ev_min[e]) ev_min[e] = int'(b);
        if (int'(a) > ev_max[e]) ev_max[e] = int'(a);
        if (int'(b) > ev_max[e]) ev_max[e] = int'(b);
        ev_w[e][w] = s_tdata;
        s_tvalid = 1'b1;
        @(posedge clk); #1; timestamp++;
      end
      s_tvalid = 1'b0;
      gap = (e % 7 == 0) ? 1 : int'($urandom_range(1, 30));
      repeat (gap) begin @(posedge clk); #1; timestamp++; end
    end
    stim_done = 1;
  end

  // ---------------- sinks ----------------
  always @(negedge clk) begin
    b_tready  <= ($urandom_range(0, 3) != 0);
    s2_tready <= ($urandom_range(0, 11) == 0);
  end

  logic [127:0] fb [$];   // words of the frame being collected
  logic [15:0]  kb [$];
  logic [127:0] fs [$];
  logic [15:0]  ks [$];
  int big_frames = 0, small_frames = 0, small_next = 0;
  int small_last_drop = 0;

  function automatic int check_frame(input int e, input logic [127:0] f [$], input logic [15:0] k [$],
                                     input int ch, input int exp_seq, input int exp_drop,
                                     input bit check_ts);
    frame_hdr_t h;
    frame_ftr_t t;
    int bad;
    bad = 0;
    if (f.size() != ev_len[e] + 2) return 1;
    h = f[0];
    t = f[f.size()-1][63:0];
    if (h.magic != HDR_MAGIC || h.channel != 8'(ch) || h.words != 16'(ev_len[e])) bad++;
    if (h.seq_no != 16'(exp_seq) || h.dropped != 16'(exp_drop)) bad++;
    if (check_ts && h.timestamp != 64'(ev_ts[e])) bad++;
    for (int w = 0; w < ev_len[e]; w++) if (f[w+1] != ev_w[e][w] || k[w+1] != 16'hFFFF) bad++;
    if (t.magic != FTR_MAGIC || t.channel != 8'(ch) || t.words != 16'(ev_len[e])) bad++;
    if ($signed(t.lg_min) != ev_min[e] || $signed(t.lg_max) != ev_max[e]) bad++;
    if (k[k.size()-1] != 16'h00FF || k[0] != 16'hFFFF) bad++;
    return bad;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (b_tvalid && b_tready) begin
      fb.push_back(b_tdata); kb.push_back(b_tkeep);
      if (b_tlast) begin
        checks++;
        if (check_frame(big_frames, fb, kb, 5, big_frames, 0, 1) != 0) begin
          failures++;
          if (failures < 10) $display("big: frame %0d wrong (size %0d)", big_frames, fb.size());
        end
        big_frames++;
        fb.delete(); kb.delete();
      end
    end
    if (s2_tvalid && s2_tready) begin
      fs.push_back(s2_tdata); ks.push_back(s2_tkeep);
      if (s2_tlast) begin
        frame_hdr_t h;
        int e;
        h = fs[0];
        // find the event with this timestamp at or after small_next
        e = small_next;
        while (e < NEV && ev_ts[e] != longint'(h.timestamp)) e++;
        checks++;
        if (e >= NEV || check_frame(e, fs, ks, 9, small_frames, int'(h.dropped), 0) != 0
            || int'(h.dropped) != small_last_drop + (e - small_next)) begin
          failures++;
          if (failures < 10) $display("small: frame %0d (event %0d) wrong", small_frames, e);
        end
        small_last_drop = int'(h.dropped);
        small_next = e + 1;
        small_frames++;
        fs.delete(); ks.delete();
      end
    end
  end

  initial begin
    wait (stim_done);
    repeat (20000) @(posedge clk);
    checks++;
    if (big_frames != NEV) begin failures++; $display("big: %0d frames of %0d", big_frames, NEV); end
    checks++;
    if (small_frames + int'(s2_dropped) != NEV) begin
      failures++; $display("small: %0d sent + %0d dropped != %0d", small_frames, s2_dropped, NEV);
    end
    checks++;
    if (s2_dropped == 0 || small_frames == 0) begin failures++; $display("overflow not exercised"); end
    checks++;
    if (b_dropped != 0) begin failures++; $display("big buffer dropped frames"); end
    $display("big: %0d frames, small: %0d frames, %0d dropped", big_frames, small_frames, s2_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
