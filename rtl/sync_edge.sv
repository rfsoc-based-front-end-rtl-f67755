// Input synchroniser with rising-edge detector.
//
// Brings an asynchronous level from a front-panel TTL input or the RJ45
// synchronisation port into the 125 MHz clock domain through STAGES
// flip-flops, and emits `pulse` for one cycle on each rising edge of the
// synchronised level. Latency from the input edge to `pulse` is STAGES+1
// cycles. The paper uses the TTL input as an external-hit flag source and
// the RJ45 port for a forced flag and a system reset; the synchroniser
// depth and edge detection are this design's choices.
module sync_edge #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic async_in,
  output logic level,
  output logic pulse
);
  logic [STAGES-1:0] sync_q;
  logic              last_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync_q <= '0;
      last_q <= 1'b0;
      pulse  <= 1'b0;
    end else begin
      sync_q <= {sync_q[STAGES-2:0], async_in};
      last_q <= sync_q[STAGES-1];
      pulse  <= sync_q[STAGES-1] & ~last_q;
    end
  end

  assign level = sync_q[STAGES-1];
endmodule
