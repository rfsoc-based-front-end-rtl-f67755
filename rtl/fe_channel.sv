// One front-end channel: h-gain DSP, trigger and framing.
//
// The h-gain RF-ADC stream passes the DSP module (truncation, baseline
// restoration, 8 ns moving average; 3 cycles). One copy feeds the digital
// discriminator, whose event-hit flag joins the shared external and forced
// flags in the trigger selector (2 cycles for both). The other copy, with
// the aligned l-gain samples as side data, is delayed by PRE_MAX + 2 cycles
// and gated by the data trigger to pre + 1 + post words around each
// trigger. The frame generator stores each gated run as a frame in its
// 56 kB buffer and sends it out; the width converter narrows the frame
// stream to 64 bits for the interconnect. This follows the per-channel
// chain of the paper's firmware diagram; latencies are this design's.
module fe_channel
  import fe_pkg::*;
#(
  parameter int unsigned CH        = 0,
  parameter int unsigned BUF_DEPTH = 3584,
  parameter int unsigned PRE_MAX   = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [127:0]       adc_tdata,
  input  logic               adc_tvalid,
  input  logic [31:0]        lg_data,
  input  logic               lg_valid,
  input  logic               external_hit,
  input  logic               forced,
  input  fe_cfg_t            cfg,
  input  logic signed [15:0] threshold,
  input  logic [TS_W-1:0]    timestamp,
  output logic [63:0]        m_tdata,
  output logic [7:0]         m_tkeep,
  output logic               m_tlast,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               trigger,
  output logic [2:0]         trig_source,
  output logic               overflow,
  output logic [15:0]        dropped
);
  localparam int unsigned DSP_LAT = 3;

  logic [127:0] dsp_tdata;
  logic         dsp_tvalid;
  logic [31:0]  lg_al;
  logic         lg_al_v;
  logic         hit;

  dsp_module u_dsp (
    .clk, .rst_n, .s_tdata(adc_tdata), .s_tvalid(adc_tvalid),
    .blr_en(cfg.blr_en), .ma_en(cfg.ma_en), .m_tdata(dsp_tdata), .m_tvalid(dsp_tvalid));

  lgain_adc_if #(.LAT(DSP_LAT)) u_lg (
    .clk, .rst_n, .lg_data, .lg_valid, .m_data(lg_al), .m_valid(lg_al_v));

  digital_discriminator u_disc (
    .clk, .rst_n, .s_tdata(dsp_tdata), .s_tvalid(dsp_tvalid), .threshold, .hit);

  trigger_selector u_sel (
    .clk, .rst_n, .event_hit(hit), .external_hit, .forced, .mode(cfg.trig_mode),
    .trigger, .source(trig_source));

  logic [127:0] dl_tdata;
  logic         dl_tvalid;
  logic [31:0]  dl_tuser;

  stream_delay #(.DEPTH(PRE_MAX + 2), .DATA_W(128), .USER_W(32)) u_delay (
    .clk, .rst_n, .s_tdata(dsp_tdata), .s_tvalid(dsp_tvalid), .s_tuser(lg_al_v ? lg_al : 32'd0),
    .m_tdata(dl_tdata), .m_tvalid(dl_tvalid), .m_tuser(dl_tuser));

  logic [127:0] g_tdata;
  logic         g_tvalid;
  logic [31:0]  g_tuser;

  data_trigger #(.PRE_MAX(PRE_MAX)) u_dtrig (
    .clk, .rst_n, .s_tdata(dl_tdata), .s_tvalid(dl_tvalid), .s_tuser(dl_tuser),
    .trigger, .pre(cfg.pre), .post(cfg.post),
    .m_tdata(g_tdata), .m_tvalid(g_tvalid), .m_tuser(g_tuser));

  logic [127:0] f_tdata;
  logic [15:0]  f_tkeep;
  logic         f_tlast, f_tvalid, f_tready;

  frame_generator #(.DEPTH(BUF_DEPTH), .CH(CH)) u_fg (
    .clk, .rst_n, .s_tdata(g_tdata), .s_tvalid(g_tvalid), .s_tuser(g_tuser), .timestamp,
    .m_tdata(f_tdata), .m_tkeep(f_tkeep), .m_tlast(f_tlast), .m_tvalid(f_tvalid), .m_tready(f_tready),
    .dropped, .overflow);

  axis_width_conv #(.IN_W(128), .OUT_W(64)) u_wc (
    .clk, .rst_n, .s_tdata(f_tdata), .s_tkeep(f_tkeep), .s_tlast(f_tlast), .s_tvalid(f_tvalid),
    .s_tready(f_tready), .m_tdata, .m_tkeep, .m_tlast, .m_tvalid, .m_tready);
endmodule
