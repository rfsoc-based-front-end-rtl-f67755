// Timestamp counter.
//
// Counts 125 MHz clock cycles (8 ns each) in a W-bit register. A one-cycle
// `sync_clear`, the synchronised system-reset pulse from the RJ45
// synchronisation port, sets the count to zero so that several boards
// share one time origin. The count is what the frame generators stamp into
// their headers. Timestamps and the external system reset are the paper's;
// the width and the 8 ns unit are this design's choices.
module timestamp_counter #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sync_clear,
  output logic [W-1:0] count
);
  always_ff @(posedge clk) begin
    if (!rst_n || sync_clear) count <= '0;
    else                      count <= count + 1'b1;
  end
endmodule
