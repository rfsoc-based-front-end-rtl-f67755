// Programmable-logic top of the 16-channel pulse-detection front end.
//
// Sixteen RF-ADC h-gain streams (8 samples of 1 GS/s per 125 MHz cycle)
// and sixteen l-gain ADC sample pairs enter; one 64-bit AXI4-Stream of
// frames leaves towards the DMA engine of the processing system. Each
// channel (fe_channel) filters its waveform, triggers on its own
// discriminator, on the shared front-panel TTL input or on a forced flag
// (register write or RJ45 input), and stores triggered windows as frames
// in its own 56 kB buffer. A round-robin interconnect merges whole frames
// from the sixteen channels; m_axis_tid names the channel. A FIFO
// decouples the merged stream from the DMA. A 64-bit timestamp counter,
// cleared by the RJ45 system-reset input, stamps the frames, and an
// AXI4-lite register file (see pl_regs) holds the configuration.
//
// All logic runs on one 125 MHz clock `clk`; rst_n is a synchronous
// active-low reset. TTL and RJ45 inputs are asynchronous and synchronised
// here. The block structure follows the paper's firmware diagram; the RF-ADC
// tiles, the l-gain ADC capture primitives, the DMA and the processor are
// outside and appear as ports.
module rfsoc_fe_top
  import fe_pkg::*;
#(
  parameter int unsigned NCH        = 16,
  parameter int unsigned BUF_DEPTH  = 3584,
  parameter int unsigned FIFO_DEPTH = 1024,
  parameter int unsigned PRE_MAX    = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // RF-ADC h-gain streams
  input  logic [127:0]           adc_tdata  [NCH],
  input  logic [NCH-1:0]         adc_tvalid,
  // l-gain ADC samples, two per cycle
  input  logic [31:0]            lg_data    [NCH],
  input  logic [NCH-1:0]         lg_valid,
  // front panel and RJ45 synchronisation port
  input  logic                   ttl_in,
  input  logic                   rj45_force,
  input  logic                   rj45_sysreset,
  // AXI4-lite from the processing system
  input  logic [7:0]             s_axil_awaddr,
  input  logic                   s_axil_awvalid,
  output logic                   s_axil_awready,
  input  logic [31:0]            s_axil_wdata,
  input  logic [3:0]             s_axil_wstrb,
  input  logic                   s_axil_wvalid,
  output logic                   s_axil_wready,
  output logic [1:0]             s_axil_bresp,
  output logic                   s_axil_bvalid,
  input  logic                   s_axil_bready,
  input  logic [7:0]             s_axil_araddr,
  input  logic                   s_axil_arvalid,
  output logic                   s_axil_arready,
  output logic [31:0]            s_axil_rdata,
  output logic [1:0]             s_axil_rresp,
  output logic                   s_axil_rvalid,
  input  logic                   s_axil_rready,
  // merged frame stream to the DMA
  output logic [63:0]            m_axis_tdata,
  output logic [7:0]             m_axis_tkeep,
  output logic                   m_axis_tlast,
  output logic [$clog2(NCH)-1:0] m_axis_tid,
  output logic                   m_axis_tvalid,
  input  logic                   m_axis_tready,
  // status
  output logic [NCH-1:0]         trigger,
  output logic [3*NCH-1:0]       trig_source,   // {forced, external, event} per channel
  output logic [NCH-1:0]         overflow,
  output logic [$clog2(FIFO_DEPTH):0] fifo_count
);
  localparam int unsigned IW = $clog2(NCH);
  localparam int unsigned FW = 64 + 8 + 1 + IW;

  // ---- asynchronous inputs ----
  logic ext_hit, rj_force, rj_reset;
  sync_edge u_ttl  (.clk, .rst_n, .async_in(ttl_in),        .level(), .pulse(ext_hit));
  sync_edge u_rjf  (.clk, .rst_n, .async_in(rj45_force),    .level(), .pulse(rj_force));
  sync_edge u_rjr  (.clk, .rst_n, .async_in(rj45_sysreset), .level(), .pulse(rj_reset));

  // ---- timestamp ----
  logic [TS_W-1:0] ts;
  timestamp_counter #(.W(TS_W)) u_ts (.clk, .rst_n, .sync_clear(rj_reset), .count(ts));

  // ---- registers ----
  fe_cfg_t            cfg;
  logic signed [15:0] thr  [NCH];
  logic [15:0]        drop [NCH];
  logic               reg_force;

  pl_regs #(.NCH(NCH)) u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .cfg, .threshold(thr), .force_pulse(reg_force), .dropped(drop));

  logic forced;
  assign forced = reg_force | rj_force;

  // ---- channels ----
  logic [63:0]  c_tdata [NCH];
  logic [7:0]   c_tkeep [NCH];
  logic [NCH-1:0] c_tlast, c_tvalid, c_tready;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    fe_channel #(.CH(c), .BUF_DEPTH(BUF_DEPTH), .PRE_MAX(PRE_MAX)) u_ch (
      .clk, .rst_n,
      .adc_tdata(adc_tdata[c]), .adc_tvalid(adc_tvalid[c]),
      .lg_data(lg_data[c]), .lg_valid(lg_valid[c]),
      .external_hit(ext_hit), .forced, .cfg, .threshold(thr[c]), .timestamp(ts),
      .m_tdata(c_tdata[c]), .m_tkeep(c_tkeep[c]), .m_tlast(c_tlast[c]),
      .m_tvalid(c_tvalid[c]), .m_tready(c_tready[c]),
      .trigger(trigger[c]), .trig_source(trig_source[3*c +: 3]), .overflow(overflow[c]), .dropped(drop[c]));
  end

  // ---- merge ----
  logic [63:0]   x_tdata;
  logic [7:0]    x_tkeep;
  logic          x_tlast, x_tvalid, x_tready;
  logic [IW-1:0] x_tid;

  axis_rr_interconnect #(.N(NCH), .W(64)) u_ic (
    .clk, .rst_n, .s_tdata(c_tdata), .s_tkeep(c_tkeep), .s_tlast(c_tlast),
    .s_tvalid(c_tvalid), .s_tready(c_tready),
    .m_tdata(x_tdata), .m_tkeep(x_tkeep), .m_tlast(x_tlast), .m_tid(x_tid),
    .m_tvalid(x_tvalid), .m_tready(x_tready));

  logic [FW-1:0] f_out;
  axis_fifo #(.W(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .s_data({x_tid, x_tlast, x_tkeep, x_tdata}), .s_valid(x_tvalid), .s_ready(x_tready),
    .m_data(f_out), .m_valid(m_axis_tvalid), .m_ready(m_axis_tready), .count(fifo_count));

  assign {m_axis_tid, m_axis_tlast, m_axis_tkeep, m_axis_tdata} = f_out;
endmodule
