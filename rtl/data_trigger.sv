// Data trigger: opens the delayed stream around each trigger flag.
//
// The stream arriving here has been delayed by PRE_MAX + 2 cycles. Its
// TVALID is held low, except in a window of pre + 1 + post cycles that
// covers the word on which the trigger fired, `pre` words before it and
// `post` words after it. To place the window, the trigger flag is itself
// delayed by PRE_MAX - pre cycles (a tapped shift register). Each delayed
// flag (re)loads a down-counter with pre + post; TVALID is high while the
// flag or a non-zero count is present, so a trigger that arrives inside an
// open window stretches it, and windows that touch merge into one.
//
// Interface: pre (0..PRE_MAX) and post in 8 ns cycles; `pre` must only be
// changed while no trigger is in flight. The gating of TVALID by the
// trigger flag with pre/post times is the paper's; the counter scheme,
// the retrigger rule and the units are this design's choices.
module data_trigger
  import fe_pkg::*;
#(
  parameter int unsigned PRE_MAX = 32,
  parameter int unsigned DATA_W  = 128,
  parameter int unsigned USER_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tvalid,
  input  logic [USER_W-1:0] s_tuser,
  input  logic              trigger,
  input  logic [PRE_W-1:0]  pre,
  input  logic [POST_W-1:0] post,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tvalid,
  output logic [USER_W-1:0] m_tuser
);
  // trig_sr[i] = trigger flag i+1 cycles ago
  logic [PRE_MAX-1:0] trig_sr;
  logic               trig_d;
  logic [POST_W:0]    remain;
  logic [PRE_W-1:0]   pre_c;
  logic [5+PRE_W:0]   tap;
  localparam int unsigned SW = $clog2(PRE_MAX);

  assign pre_c = (pre > PRE_W'(PRE_MAX)) ? PRE_W'(PRE_MAX) : pre;
  assign tap   = (6+PRE_W)'(PRE_MAX) - (6+PRE_W)'(pre_c);   // PRE_MAX - pre

  always_comb begin
    if (tap == '0) trig_d = trigger;
    else           trig_d = trig_sr[SW'(tap - 1'b1)];
  end

  logic open_now;
  assign open_now = trig_d | (remain != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig_sr <= '0;
      remain  <= '0;
    end else begin
      trig_sr <= {trig_sr[PRE_MAX-2:0], trigger};
      if (trig_d)              remain <= (POST_W+1)'(pre_c) + (POST_W+1)'(post);
      else if (remain != '0)   remain <= remain - 1'b1;
    end
  end

  assign m_tdata  = s_tdata;
  assign m_tuser  = s_tuser;
  assign m_tvalid = s_tvalid & open_now;
endmodule
