// DSP module: baseline restoration (BLR) followed by an 8 ns moving average.
//
// Each 125 MHz cycle brings eight 1 GS/s samples of 16 bits from the RF-ADC.
// Only the upper 12 bits are kept (signed). BLR removes the PMT overshoot
// after a large pulse: positive samples are clipped to zero, a 64-sample
// (64 ns) running mean of what remains is formed, and that mean is subtracted
// from the sample. The BLR waveform then passes an 8-sample (8 ns) running
// mean. Both means are causal and include the current sample; all eight
// lanes are computed in parallel from per-cycle prefix sums, with the
// samples of the previous eight cycles kept in a shift register.
//
// The truncation, the 64 ns and 8 ns windows and the clipping of the
// positive part follow the paper. The window alignment, floor division by
// shift, the bypass inputs (blr_en, ma_en) and the 3-cycle latency are this
// design's choices. Latency is 3 cycles whichever bypasses are set.
module dsp_module
#(
  parameter int unsigned LANES   = 8,
  parameter int unsigned BLR_LEN = 64,   // samples in the BLR mean
  parameter int unsigned MA_LEN  = 8     // samples in the output mean
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [LANES*16-1:0]      s_tdata,
  input  logic                     s_tvalid,
  input  logic                     blr_en,
  input  logic                     ma_en,
  output logic [LANES*16-1:0]      m_tdata,
  output logic                     m_tvalid
);
  // Whole-cycle history lengths
  localparam int unsigned BLR_CYC = BLR_LEN / LANES;   // 8
  localparam int unsigned MA_CYC  = MA_LEN / LANES;    // 1
  localparam int unsigned BLR_SH  = $clog2(BLR_LEN);
  localparam int unsigned MA_SH   = $clog2(MA_LEN);
  localparam int unsigned AW      = 24;                // accumulator width

  typedef logic signed [AW-1:0] acc_t;

  // ---------------- stage 1: truncate, clip ----------------
  logic signed [11:0] x1   [LANES];
  logic signed [11:0] neg1 [LANES];
  logic               v1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int i = 0; i < LANES; i++) begin
        x1[i]   <= '0;
        neg1[i] <= '0;
      end
    end else begin
      v1 <= s_tvalid;
      for (int i = 0; i < LANES; i++) begin
        x1[i]   <= s_tdata[i*16+4 +: 12];
        neg1[i] <= s_tdata[i*16+15] ? s_tdata[i*16+4 +: 12] : 12'sd0;
      end
    end
  end

  // History of clipped samples: hist[c] holds cycle t-1-c
  logic signed [11:0] nhist [BLR_CYC][LANES];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < BLR_CYC; c++)
        for (int i = 0; i < LANES; i++) nhist[c][i] <= '0;
    end else if (v1) begin
      nhist[0] <= neg1;
      for (int c = 1; c < BLR_CYC; c++) nhist[c] <= nhist[c-1];
    end
  end

  // ---------------- stage 2: BLR ----------------
  // window(k) = prefix_t[k] + sum(cycles t-1 .. t-BLR_CYC+1) + suffix of cycle t-BLR_CYC after k
  acc_t pre_now [LANES];
  acc_t pre_old [LANES];
  acc_t sum_old_all, sum_mid;
  logic signed [12:0] blr_val [LANES];

  always_comb begin
    acc_t run_n, run_o;
    run_n = '0;
    run_o = '0;
    for (int i = 0; i < LANES; i++) begin
      run_n      = run_n + acc_t'(neg1[i]);
      run_o      = run_o + acc_t'(nhist[BLR_CYC-1][i]);
      pre_now[i] = run_n;
      pre_old[i] = run_o;
    end
    sum_old_all = run_o;
    sum_mid = '0;
    for (int c = 0; c < BLR_CYC-1; c++)
      for (int i = 0; i < LANES; i++) sum_mid = sum_mid + acc_t'(nhist[c][i]);
    for (int k = 0; k < LANES; k++) begin
      acc_t win;
      win = pre_now[k] + sum_mid + (sum_old_all - pre_old[k]);
      win = win >>> BLR_SH;
      blr_val[k] = blr_en ? 13'(acc_t'(x1[k]) - win) : 13'(x1[k]);
    end
  end

  logic signed [12:0] b2 [LANES];
  logic               v2;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v2 <= 1'b0;
      for (int i = 0; i < LANES; i++) b2[i] <= '0;
    end else begin
      v2 <= v1;
      b2 <= blr_val;
    end
  end

  // History of BLR samples for the output mean
  logic signed [12:0] bhist [MA_CYC][LANES];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < MA_CYC; c++)
        for (int i = 0; i < LANES; i++) bhist[c][i] <= '0;
    end else if (v2) begin
      bhist[0] <= b2;
      for (int c = 1; c < MA_CYC; c++) bhist[c] <= bhist[c-1];
    end
  end

  // ---------------- stage 3: 8 ns moving average ----------------
  logic [LANES*16-1:0] ma_word;
  always_comb begin
    acc_t run_n, run_o, old_all, mid, win;
    acc_t pn [LANES];
    acc_t po [LANES];
    run_n = '0;
    run_o = '0;
    for (int i = 0; i < LANES; i++) begin
      run_n = run_n + acc_t'(b2[i]);
      run_o = run_o + acc_t'(bhist[MA_CYC-1][i]);
      pn[i] = run_n;
      po[i] = run_o;
    end
    old_all = run_o;
    mid = '0;
    for (int c = 0; c < MA_CYC-1; c++)
      for (int i = 0; i < LANES; i++) mid = mid + acc_t'(bhist[c][i]);
    for (int k = 0; k < LANES; k++) begin
      win = pn[k] + mid + (old_all - po[k]);
      win = win >>> MA_SH;
      ma_word[k*16 +: 16] = ma_en ? 16'(win) : 16'(acc_t'(b2[k]));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_tdata  <= '0;
      m_tvalid <= 1'b0;
    end else begin
      m_tdata  <= ma_word;
      m_tvalid <= v2;
    end
  end
endmodule
