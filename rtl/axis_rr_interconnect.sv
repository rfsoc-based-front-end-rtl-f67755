// AXI4-Stream interconnect: N inputs merged into one, round-robin per frame.
//
// When idle, the arbiter grants the first input with TVALID high, searching
// from the one after the last input granted. The grant is held until the
// word with TLAST has been transferred, so frames are never interleaved.
// The granted input's word passes combinationally; m_tid gives its index.
// Arbitration costs one idle cycle between frames. The round-robin merge
// of the 16 channel streams is the paper's; frame-level granularity is
// this design's choice.
module axis_rr_interconnect #(
  parameter int unsigned N  = 16,
  parameter int unsigned W  = 64,
  parameter int unsigned IW = $clog2(N)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [W-1:0]       s_tdata  [N],
  input  logic [W/8-1:0]     s_tkeep  [N],
  input  logic [N-1:0]       s_tlast,
  input  logic [N-1:0]       s_tvalid,
  output logic [N-1:0]       s_tready,
  output logic [W-1:0]       m_tdata,
  output logic [W/8-1:0]     m_tkeep,
  output logic               m_tlast,
  output logic [IW-1:0]      m_tid,
  output logic               m_tvalid,
  input  logic               m_tready
);
  logic          busy;
  logic [IW-1:0] grant, last_grant;
  logic [IW-1:0] pick;
  logic          pick_ok;

  // Next requester after last_grant, wrapping around
  always_comb begin
    pick    = last_grant;
    pick_ok = 1'b0;
    for (int k = N; k >= 1; k--) begin
      int unsigned c;
      c = (int'(last_grant) + k) % N;
      if (s_tvalid[c]) begin
        pick    = IW'(c);
        pick_ok = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      grant      <= '0;
      last_grant <= IW'(N-1);
    end else if (!busy) begin
      if (pick_ok) begin
        busy       <= 1'b1;
        grant      <= pick;
        last_grant <= pick;
      end
    end else if (m_tvalid && m_tready && m_tlast) begin
      busy <= 1'b0;
    end
  end

  assign m_tdata  = s_tdata[grant];
  assign m_tkeep  = s_tkeep[grant];
  assign m_tlast  = s_tlast[grant];
  assign m_tid    = grant;
  assign m_tvalid = busy & s_tvalid[grant];
  always_comb begin
    s_tready = '0;
    s_tready[grant] = busy & m_tready;
  end
endmodule
