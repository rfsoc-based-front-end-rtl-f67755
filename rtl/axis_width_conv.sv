// AXI4-Stream data width converter, 128 to 64 bits.
//
// Each 128-bit input word leaves as two 64-bit words, lower half first.
// An upper half whose TKEEP bits are all zero (the frame footer) is not
// sent, and TLAST moves to the last half actually sent. The input word is
// held in a register: s_tready is high when that register is empty or is
// being emptied, so the converter runs at one output word per cycle.
// The converter's place in the chain is the paper's; the output width is
// this design's choice.
module axis_width_conv #(
  parameter int unsigned IN_W  = 128,
  parameter int unsigned OUT_W = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [IN_W-1:0]      s_tdata,
  input  logic [IN_W/8-1:0]    s_tkeep,
  input  logic                 s_tlast,
  input  logic                 s_tvalid,
  output logic                 s_tready,
  output logic [OUT_W-1:0]     m_tdata,
  output logic [OUT_W/8-1:0]   m_tkeep,
  output logic                 m_tlast,
  output logic                 m_tvalid,
  input  logic                 m_tready
);
  localparam int unsigned R = IN_W / OUT_W;   // halves per word
  localparam int unsigned KW = OUT_W / 8;

  logic [IN_W-1:0]   data_q;
  logic [IN_W/8-1:0] keep_q;
  logic              last_q;
  logic              full_q;
  logic [$clog2(R+1)-1:0] idx_q;

  // Index of the last part with any TKEEP bit set
  logic [$clog2(R+1)-1:0] last_idx;
  always_comb begin
    last_idx = '0;
    for (int i = 0; i < R; i++)
      if (keep_q[i*KW +: KW] != '0) last_idx = ($clog2(R+1))'(i);
  end

  logic fin;   // the current part is the last of the word
  assign fin      = (idx_q == last_idx);
  assign m_tvalid = full_q;
  assign m_tdata  = data_q[idx_q*OUT_W +: OUT_W];
  assign m_tkeep  = keep_q[idx_q*KW +: KW];
  assign m_tlast  = last_q & fin;
  assign s_tready = ~full_q | (m_tready & fin);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full_q <= 1'b0;
      idx_q  <= '0;
      data_q <= '0;
      keep_q <= '0;
      last_q <= 1'b0;
    end else begin
      if (full_q && m_tready && !fin) idx_q <= idx_q + 1'b1;
      if (full_q && m_tready && fin) full_q <= 1'b0;
      if (s_tvalid && s_tready) begin
        data_q <= s_tdata;
        keep_q <= s_tkeep;
        last_q <= s_tlast;
        full_q <= 1'b1;
        idx_q  <= '0;
      end
    end
  end
endmodule
