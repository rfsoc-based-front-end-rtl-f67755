// Frame generator with its 56 kB event buffer.
//
// An event is a run of consecutive words whose TVALID is high (the data
// trigger opens TVALID only around triggers). For every event the samples
// are written into a BRAM ring buffer of DEPTH 128-bit words, followed by
// a 64-bit footer; the header is queued in a small descriptor FIFO, so the
// single buffer write port is never needed twice in a cycle and events may
// follow each other without a gap. When an event has been stored, a
// reader sends it downstream as one AXI4-Stream frame:
//
//   word 0        header {A5, channel, words, sequence, dropped, timestamp}
//   words 1..N    the N sample words of the event, as they arrived
//   word N+1      footer {5A, channel, l-gain min, l-gain max, N} in bits
//                 63:0, TKEEP = 16'h00FF, TLAST = 1
//
// An 80 ns event (10 words) thus takes 16 + 160 + 8 = 184 bytes. The
// timestamp is the value of `timestamp` when the first word was stored.
// The l-gain minimum and maximum are taken over both l-gain samples of
// every word of the event.
//
// Overflow: if the buffer cannot take another word plus the footer, or the
// descriptor FIFO is full when the event ends, the whole event is dropped
// (write pointer rolled back), `dropped` counts it and the next header
// reports the count. Words are never lost from a stored frame.
//
// Timing: one word accepted per cycle, continuously. Buffer reads have one
// cycle latency and feed a two-entry output register, so the output
// sustains one word per cycle under TREADY.
//
// The paper gives the event detection from TVALID, the header/footer/
// timestamp/l-gain content and the 56 kB BRAM buffer; the field layout,
// the descriptor FIFO and the drop policy are this design's choices.
module frame_generator
  import fe_pkg::*;
#(
  parameter int unsigned DEPTH      = 3584,   // 56 kB of 128-bit words
  parameter int unsigned DESC_DEPTH = 512,  // headers waiting; > DEPTH / 11
  parameter int unsigned CH         = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [127:0]    s_tdata,
  input  logic            s_tvalid,
  input  logic [31:0]     s_tuser,     // two l-gain samples
  input  logic [TS_W-1:0] timestamp,
  output logic [127:0]    m_tdata,
  output logic [15:0]     m_tkeep,
  output logic            m_tlast,
  output logic            m_tvalid,
  input  logic            m_tready,
  output logic [15:0]     dropped,
  output logic            overflow      // one-cycle pulse per dropped event
);
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned DAW = $clog2(DESC_DEPTH);

  typedef struct packed {
    logic [TS_W-1:0] ts;
    logic [15:0]     words;
    logic [15:0]     seq;
    logic [15:0]     dropped;
  } desc_t;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  // ---------------- buffer ----------------
  logic [127:0] mem [DEPTH];
  logic         mem_we;
  logic [AW-1:0] mem_wa;
  logic [127:0] mem_wd;
  logic [AW-1:0] mem_ra;
  logic         mem_re;
  logic [127:0] mem_rd;

  always_ff @(posedge clk) begin
    if (mem_we) mem[mem_wa] <= mem_wd;
  end
  always_ff @(posedge clk) begin
    if (mem_re) mem_rd <= mem[mem_ra];
  end

  // ---------------- descriptor FIFO ----------------
  desc_t        dq [DESC_DEPTH];
  logic [DAW:0] d_wp, d_rp;
  logic         d_push, d_full, d_empty;
  desc_t        d_in;
  assign d_full  = (d_wp[DAW] != d_rp[DAW]) && (d_wp[DAW-1:0] == d_rp[DAW-1:0]);
  assign d_empty = (d_wp == d_rp);

  always_ff @(posedge clk) begin
    if (d_push) dq[d_wp[DAW-1:0]] <= d_in;
  end

  // ---------------- write side ----------------
  logic [AW-1:0]   wr_ptr, fs_ptr;
  logic [AW:0]     used;
  logic            in_evt, evt_drop;
  logic [15:0]     evt_words;
  logic [TS_W-1:0] evt_ts;
  logic signed [15:0] lg_min, lg_max;
  logic [15:0]     seq;
  logic            rd_take;     // buffer word read this cycle

  logic signed [15:0] lg0, lg1, bmin, bmax;
  assign lg0  = s_tuser[15:0];
  assign lg1  = s_tuser[31:16];
  assign bmin = (lg0 < lg1) ? lg0 : lg1;
  assign bmax = (lg0 < lg1) ? lg1 : lg0;

  logic room;
  assign room = (used <= (AW+1)'(DEPTH-2)) && !(in_evt && (evt_words == 16'hFFFF));

  logic start, wr_data, ending, commit, rollback;
  assign start    = s_tvalid & ~in_evt;
  assign wr_data  = s_tvalid & ~(in_evt ? evt_drop : 1'b0) & room;
  assign ending   = ~s_tvalid & in_evt;
  assign commit   = ending & ~evt_drop & ~d_full;
  assign rollback = ending & ~commit;

  frame_ftr_t ftr;
  assign ftr = '{magic: FTR_MAGIC, channel: 8'(CH), lg_min: lg_min, lg_max: lg_max, words: evt_words};

  always_comb begin
    mem_we = 1'b0;
    mem_wa = wr_ptr;
    mem_wd = s_tdata;
    if (wr_data) begin
      mem_we = 1'b1;
    end else if (commit) begin
      mem_we = 1'b1;
      mem_wd = {64'd0, ftr};
    end
  end

  assign d_push = commit;
  assign d_in   = '{ts: evt_ts, words: evt_words, seq: seq, dropped: dropped};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      fs_ptr    <= '0;
      in_evt    <= 1'b0;
      evt_drop  <= 1'b0;
      evt_words <= '0;
      evt_ts    <= '0;
      lg_min    <= '0;
      lg_max    <= '0;
      seq       <= '0;
      dropped   <= '0;
      overflow  <= 1'b0;
      used      <= '0;
      d_wp      <= '0;
    end else begin
      overflow <= 1'b0;
      if (start) begin
        in_evt    <= 1'b1;
        evt_ts    <= timestamp;
        fs_ptr    <= wr_ptr;
        evt_drop  <= ~room;
        evt_words <= room ? 16'd1 : 16'd0;
        lg_min    <= bmin;
        lg_max    <= bmax;
      end else if (s_tvalid) begin
        if (!room) evt_drop <= 1'b1;
        if (wr_data) evt_words <= evt_words + 1'b1;
        if (bmin < lg_min) lg_min <= bmin;
        if (bmax > lg_max) lg_max <= bmax;
      end
      if (wr_data || commit) wr_ptr <= inc(wr_ptr);
      if (ending) begin
        in_evt   <= 1'b0;
        evt_drop <= 1'b0;
      end
      if (commit) begin
        d_wp <= d_wp + 1'b1;
        seq  <= seq + 1'b1;
      end
      if (rollback) begin
        wr_ptr   <= fs_ptr;
        overflow <= 1'b1;
        if (dropped != 16'hFFFF) dropped <= dropped + 1'b1;
      end
      used <= used + (AW+1)'(wr_data || commit) - (AW+1)'(rd_take)
                   - (rollback ? (AW+1)'(evt_words) : '0);
    end
  end

  // ---------------- read side ----------------
  typedef struct packed {
    logic [127:0] data;
    logic [15:0]  keep;
    logic         last;
  } obeat_t;

  obeat_t       ob [2];
  logic         ob_head;
  logic [1:0]   ob_cnt;
  logic         inflight, inflight_last;
  logic         rd_active;
  logic [16:0]  rd_left;
  logic [AW-1:0] rd_ptr;
  desc_t        cur;
  logic         push_hdr, pop_out;
  obeat_t       push_beat;
  logic         push_any;

  assign cur      = dq[d_rp[DAW-1:0]];
  assign push_hdr = ~rd_active & ~d_empty & ~inflight & (ob_cnt < 2'd2);
  assign rd_take  = rd_active & (rd_left != '0) & ((ob_cnt + 2'(inflight) - 2'(pop_out)) < 2'd2);
  assign mem_re   = rd_take;
  assign mem_ra   = rd_ptr;
  assign pop_out  = m_tvalid & m_tready;

  frame_hdr_t hdr;
  assign hdr = '{magic: HDR_MAGIC, channel: 8'(CH), words: cur.words, seq_no: cur.seq,
                 dropped: cur.dropped, timestamp: cur.ts};

  always_comb begin
    push_any  = 1'b0;
    push_beat = '{data: hdr, keep: 16'hFFFF, last: 1'b0};
    if (inflight) begin
      push_any  = 1'b1;
      push_beat = '{data: mem_rd, keep: inflight_last ? 16'h00FF : 16'hFFFF, last: inflight_last};
    end else if (push_hdr) begin
      push_any  = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push_any) ob[ob_head ^ ob_cnt[0]] <= push_beat;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ob_head       <= 1'b0;
      ob_cnt        <= '0;
      inflight      <= 1'b0;
      inflight_last <= 1'b0;
      rd_active     <= 1'b0;
      rd_left       <= '0;
      rd_ptr        <= '0;
      d_rp          <= '0;
    end else begin
      ob_cnt <= ob_cnt + 2'(push_any) - 2'(pop_out);
      if (pop_out) ob_head <= ~ob_head;
      inflight      <= rd_take;
      inflight_last <= rd_take && (rd_left == 17'd1);
      if (push_hdr) begin
        d_rp      <= d_rp + 1'b1;
        rd_active <= 1'b1;
        rd_left   <= 17'(cur.words) + 17'd1;
      end else if (rd_take) begin
        rd_ptr  <= inc(rd_ptr);
        rd_left <= rd_left - 1'b1;
        if (rd_left == 17'd1) rd_active <= 1'b0;
      end
    end
  end

  assign m_tvalid = (ob_cnt != '0);
  assign m_tdata  = ob[ob_head].data;
  assign m_tkeep  = ob[ob_head].keep;
  assign m_tlast  = ob[ob_head].last;

  // Handshake rule: a presented word stays until taken
  property p_stable;
    @(posedge clk) disable iff (!rst_n) (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata));
  endproperty
  a_stable: assert property (p_stable);
endmodule
