// Trigger selector: merges the hit flags into one trigger flag.
//
// Three flag sources reach each channel: the event-hit flag of its own
// discriminator, the external-hit flag from the TTL input and the forced
// flag from the processing system or an external module. The trigger mode
// is an enable mask {forced, external, event}; the trigger flag is the OR
// of the enabled flags, registered (one cycle latency). `source` reports,
// in the same cycle, which enabled flags fired.
//
// The three sources and the mode-dependent merge are the paper's; the mask
// encoding and the OR are this design's choices.
module trigger_selector
  import fe_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       event_hit,
  input  logic       external_hit,
  input  logic       forced,
  input  logic [2:0] mode,
  output logic       trigger,
  output logic [2:0] source
);
  logic [2:0] flags;
  assign flags = {forced, external_hit, event_hit};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trigger <= 1'b0;
      source  <= '0;
    end else begin
      source  <= flags & mode;
      trigger <= |(flags & mode);
    end
  end
endmodule
