// Digital discriminator: amplitude-threshold event-hit flag.
//
// Looks at the eight filtered samples of each 125 MHz word and raises
// `hit` for one cycle per word in which any sample is at or above the
// signed `threshold` (ADC counts). The output is registered: `hit` refers
// to the word presented one cycle earlier.
//
// The simple amplitude threshold is the paper's; the comparison polarity
// (positive pulses after the inverting analog front end) and the one-cycle
// latency are this design's choices. A suitable threshold is about 1/5 of
// the single-photoelectron amplitude, i.e. about 8 counts for a 40-count
// single-photoelectron peak.
module digital_discriminator
#(
  parameter int unsigned LANES = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [LANES*16-1:0] s_tdata,
  input  logic                s_tvalid,
  input  logic signed [15:0]  threshold,
  output logic                hit
);
  logic over;
  always_comb begin
    over = 1'b0;
    for (int i = 0; i < LANES; i++)
      if ($signed(s_tdata[i*16 +: 16]) >= threshold) over = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) hit <= 1'b0;
    else        hit <= s_tvalid & over;
  end
endmodule
