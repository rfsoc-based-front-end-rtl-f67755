// l-gain ADC interface.
//
// The low-gain path uses a separate 250 MS/s 16-bit ADC, i.e. two samples
// per 125 MHz cycle (sample 0, the earlier, in bits 15:0). This block
// registers the already deserialised samples and delays them by LAT cycles,
// the latency of the h-gain DSP module, so that both gain channels of the
// same instant travel together from here on. Samples are two's complement.
// Only the existence of the interface is from the paper; the alignment
// delay and the sample packing are this design's choices.
module lgain_adc_if #(
  parameter int unsigned LAT = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] lg_data,
  input  logic        lg_valid,
  output logic [31:0] m_data,
  output logic        m_valid
);
  logic [31:0] dq [LAT];
  logic        vq [LAT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        dq[i] <= '0;
        vq[i] <= 1'b0;
      end
    end else begin
      dq[0] <= lg_data;
      vq[0] <= lg_valid;
      for (int i = 1; i < LAT; i++) begin
        dq[i] <= dq[i-1];
        vq[i] <= vq[i-1];
      end
    end
  end

  assign m_data  = dq[LAT-1];
  assign m_valid = vq[LAT-1];
endmodule
