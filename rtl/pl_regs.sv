// AXI4-lite register file of the programmable logic.
//
// The processing system sets every run-time parameter through this 32-bit
// AXI4-lite slave. Register map (byte addresses):
//
//   0x00 CTRL       bit 0 blr_en, bit 1 ma_en                 reset 0x3
//   0x04 TRIG_MODE  bits 2:0 enable mask {forced, external, event}
//                                                              reset 0x1
//   0x08 PRE        pre-trigger cycles (6 bits)               reset 2
//   0x0C POST       post-trigger cycles (16 bits)             reset 7
//   0x10 FORCE      write with bit 0 set: one-cycle forced flag
//   0x40+4*ch       THRESHOLD of channel ch, signed 16 bits    reset 8
//   0x80+4*ch       DROPPED frames of channel ch (read only)
//
// Writes take effect the cycle after the write response; the address and
// data channels are accepted together (awready = wready = 1 when both are
// valid and no response is pending). Reads answer one cycle after the
// address. Unmapped addresses read 0 and ignore writes; responses are
// always OKAY. Configuration over AXI4-lite is the paper's; the map and
// reset values are this design's choices (pre 2 + post 7 gives the 80 ns
// event of the paper, threshold 8 about 1/5 of a 40-count photoelectron).
module pl_regs
  import fe_pkg::*;
#(
  parameter int unsigned NCH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-lite slave
  input  logic [7:0]         s_awaddr,
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  input  logic               s_wvalid,
  output logic               s_wready,
  output logic [1:0]         s_bresp,
  output logic               s_bvalid,
  input  logic               s_bready,
  input  logic [7:0]         s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready,
  // configuration and status
  output fe_cfg_t            cfg,
  output logic signed [15:0] threshold [NCH],
  output logic               force_pulse,
  input  logic [15:0]        dropped [NCH]
);
  logic wr_go, rd_go;
  assign wr_go     = s_awvalid & s_wvalid & ~s_bvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign rd_go     = s_arvalid & ~s_rvalid;
  assign s_arready = rd_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[b*8 +: 8] = strb[b] ? nw[b*8 +: 8] : old[b*8 +: 8];
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg.blr_en    <= 1'b1;
      cfg.ma_en     <= 1'b1;
      cfg.trig_mode <= 3'b001;
      cfg.pre       <= PRE_W'(2);
      cfg.post      <= POST_W'(7);
      for (int c = 0; c < NCH; c++) threshold[c] <= 16'sd8;
      force_pulse <= 1'b0;
      s_bvalid    <= 1'b0;
    end else begin
      force_pulse <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        logic [31:0] m;
        s_bvalid <= 1'b1;
        unique case (s_awaddr) inside
          8'h00: begin
            m = merge({30'd0, cfg.ma_en, cfg.blr_en}, s_wdata, s_wstrb);
            cfg.blr_en <= m[0];
            cfg.ma_en  <= m[1];
          end
          8'h04: begin
            m = merge({29'd0, cfg.trig_mode}, s_wdata, s_wstrb);
            cfg.trig_mode <= m[2:0];
          end
          8'h08: begin
            m = merge({26'd0, cfg.pre}, s_wdata, s_wstrb);
            cfg.pre <= m[PRE_W-1:0];
          end
          8'h0C: begin
            m = merge({16'd0, cfg.post}, s_wdata, s_wstrb);
            cfg.post <= m[POST_W-1:0];
          end
          8'h10: begin
            force_pulse <= s_wstrb[0] & s_wdata[0];
          end
          [8'h40:8'h7F]: begin
            if (int'(s_awaddr[5:2]) < NCH) begin
              m = merge({{16{threshold[s_awaddr[5:2]][15]}}, threshold[s_awaddr[5:2]]}, s_wdata, s_wstrb);
              threshold[s_awaddr[5:2]] <= m[15:0];
            end
          end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_go) begin
        s_rvalid <= 1'b1;
        s_rdata  <= '0;
        unique case (s_araddr) inside
          8'h00: s_rdata <= {30'd0, cfg.ma_en, cfg.blr_en};
          8'h04: s_rdata <= {29'd0, cfg.trig_mode};
          8'h08: s_rdata <= {26'd0, cfg.pre};
          8'h0C: s_rdata <= {16'd0, cfg.post};
          [8'h40:8'h7F]: if (int'(s_araddr[5:2]) < NCH)
                           s_rdata <= {{16{threshold[s_araddr[5:2]][15]}}, threshold[s_araddr[5:2]]};
          [8'h80:8'hBF]: if (int'(s_araddr[5:2]) < NCH)
                           s_rdata <= {16'd0, dropped[s_araddr[5:2]]};
          default: ;
        endcase
      end
    end
  end

  a_bresp_held: assert property (@(posedge clk) disable iff (!rst_n)
                                 (s_bvalid && !s_bready) |=> s_bvalid);
endmodule
