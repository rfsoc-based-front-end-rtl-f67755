// Synchronous AXI4-Stream FIFO.
//
// Stores up to DEPTH words of W bits in a RAM with a registered read, plus
// up to two words in a small output buffer in front of it. A read is issued
// whenever the output buffer, counting a read already in flight and a word
// leaving in the same cycle, has room,
// so the FIFO accepts and delivers one word per cycle; a word written into
// an empty FIFO appears at the output two cycles later. `count` is the
// number of words held in the RAM and the output buffer together.
// The FIFO between interconnect and DMA is the paper's; its depth and
// structure are this design's choices.
module axis_fifo #(
  parameter int unsigned W     = 77,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [W-1:0]           s_data,
  input  logic                   s_valid,
  output logic                   s_ready,
  output logic [W-1:0]           m_data,
  output logic                   m_valid,
  input  logic                   m_ready,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;
  logic [W-1:0] rd_q;
  logic         inflight;
  logic [W-1:0] ob [2];
  logic         ob_head;
  logic [1:0]   ob_cnt;

  logic ram_empty, ram_full, push, ram_rd, pop;
  assign ram_empty = (wp == rp);
  assign ram_full  = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign s_ready   = ~ram_full;
  assign push      = s_valid & s_ready;
  assign pop       = m_valid & m_ready;
  assign ram_rd    = ~ram_empty & ((ob_cnt + 2'(inflight) - 2'(pop)) < 2'd2);

  always_ff @(posedge clk) begin
    if (push) mem[wp[AW-1:0]] <= s_data;
  end
  always_ff @(posedge clk) begin
    if (ram_rd) rd_q <= mem[rp[AW-1:0]];
  end
  always_ff @(posedge clk) begin
    if (inflight) ob[ob_head ^ ob_cnt[0]] <= rd_q;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      inflight <= 1'b0;
      ob_head  <= 1'b0;
      ob_cnt   <= '0;
      count    <= '0;
    end else begin
      if (push)   wp <= wp + 1'b1;
      if (ram_rd) rp <= rp + 1'b1;
      inflight <= ram_rd;
      ob_cnt   <= ob_cnt + 2'(inflight) - 2'(pop);
      if (pop) ob_head <= ~ob_head;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assign m_data  = ob[ob_head];
  assign m_valid = (ob_cnt != '0);

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             (m_valid && !m_ready) |=> (m_valid && $stable(m_data)));
endmodule
