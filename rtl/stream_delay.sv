// Stream delay line.
//
// Delays the filtered h-gain stream (data, valid) and its side data (the
// aligned l-gain samples) by DEPTH clock cycles, so that the trigger
// decision, which takes two cycles (discriminator and selector), and a
// pre-trigger window of up to DEPTH-2 cycles can reach back in time. It is
// a plain shift register that every cycle advances; output = input DEPTH
// cycles earlier. The delay itself is the paper's; its length is this
// design's choice.
module stream_delay #(
  parameter int unsigned DEPTH  = 34,
  parameter int unsigned DATA_W = 128,
  parameter int unsigned USER_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tvalid,
  input  logic [USER_W-1:0] s_tuser,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tvalid,
  output logic [USER_W-1:0] m_tuser
);
  typedef struct packed {
    logic              valid;
    logic [USER_W-1:0] user;
    logic [DATA_W-1:0] data;
  } beat_t;

  beat_t line [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) line[i] <= '0;
    end else begin
      line[0] <= '{valid: s_tvalid, user: s_tuser, data: s_tdata};
      for (int i = 1; i < DEPTH; i++) line[i] <= line[i-1];
    end
  end

  assign m_tdata  = line[DEPTH-1].data;
  assign m_tvalid = line[DEPTH-1].valid;
  assign m_tuser  = line[DEPTH-1].user;
endmodule
