// Self-checking testbench of dsp_module.
//
// Drives a stream of eight samples per cycle made of a flat baseline with
// noise, a large positive pulse followed by a slowly recovering negative
// overshoot, and small pulses on the overshoot. A reference model in the
// testbench keeps the whole sample history and computes, for every sample,
// the 12-bit truncation, the 64-sample mean of the negative part, the BLR
// difference and the 8-sample mean, directly from the definitions. All four
// combinations of blr_en and ma_en are run, each from reset. Every output
// lane is compared, and the 3-cycle latency is checked by the cycle on
// which the first valid output appears. A further check confirms that BLR
// brings the overshoot region closer to zero than the raw waveform.
module tb_dsp_module;
  localparam int NCYC = 400;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [127:0] s_tdata;
  logic s_tvalid;
  logic blr_en, ma_en;
  logic [127:0] m_tdata;
  logic m_tvalid;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  dsp_module dut (.*);

  int raw  [NCYC*8];   // 16-bit input samples
  int x12  [NCYC*8];
  int blr  [NCYC*8];
  int outv [NCYC*8];

  function automatic int fdiv(int a, int sh);
    return a >>> sh;
  endfunction

  task automatic make_wave();
    for (int n = 0; n < NCYC*8; n++) begin
      int v;
      v = int'($urandom_range(0, 6)) - 3;                    // noise
      if (n >= 800 && n < 820) v += 1500;                     // muon-like pulse
      if (n >= 820 && n < 1800) v -= (1800 - n) / 8;          // overshoot
      if (n % 97 == 0) v += 40;                               // small pulses
      raw[n] = (v * 16) + int'($urandom_range(0, 15));        // 16-bit code
    end
  endtask

  task automatic model(input bit be, input bit me);
    for (int n = 0; n < NCYC*8; n++) begin
      int s, sn;
      s = raw[n] >>> 4;
      x12[n] = s;
      sn = 0;
      for (int k = n - 63; k <= n; k++) if (k >= 0) sn += ((raw[k] >>> 4) < 0) ? (raw[k] >>> 4) : 0;
      blr[n] = be ? s - fdiv(sn, 6) : s;
    end
    for (int n = 0; n < NCYC*8; n++) begin
      int sb;
      sb = 0;
      for (int k = n - 7; k <= n; k++) if (k >= 0) sb += blr[k];
      outv[n] = me ? fdiv(sb, 3) : blr[n];
    end
  endtask

  task automatic run(input bit be, input bit me);
    int first_valid;
    longint err_raw, err_blr;
    blr_en = be; ma_en = me;
    s_tvalid = 1'b0; s_tdata = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    model(be, me);
    first_valid = -1;
    err_raw = 0; err_blr = 0;
    for (int c = 0; c < NCYC + 3; c++) begin
      if (m_tvalid && first_valid < 0) first_valid = c;
      if (c >= 3) begin
        for (int l = 0; l < 8; l++) begin
          int got;
          got = int'($signed(m_tdata[l*16 +: 16]));
          checks++;
          if (got != outv[(c-3)*8 + l]) begin
            failures++;
            if (failures < 10) $display("mismatch be=%0d me=%0d word %0d lane %0d: got %0d exp %0d",
                                        be, me, c-3, l, got, outv[(c-3)*8+l]);
          end
          if ((c-3)*8 + l >= 1200 && (c-3)*8 + l < 1700) begin
            err_raw += (x12[(c-3)*8+l] < 0) ? -x12[(c-3)*8+l] : x12[(c-3)*8+l];
            err_blr += (got < 0) ? -got : got;
          end
        end
      end
      if (c < NCYC) begin
        for (int l = 0; l < 8; l++) s_tdata[l*16 +: 16] = 16'(raw[c*8 + l]);
        s_tvalid = 1'b1;
      end else s_tvalid = 1'b0;
      @(posedge clk); #1;
    end
    checks++;
    if (first_valid != 3) begin
      failures++;
      $display("latency: first valid output at cycle %0d, expected 3", first_valid);
    end
    if (be) begin
      checks++;
      if (!(err_blr * 4 < err_raw)) begin
        failures++;
        $display("BLR did not restore the baseline: |raw|=%0d |blr|=%0d", err_raw, err_blr);
      end
    end
  endtask

  initial begin
    make_wave();
    @(posedge clk); #1;
    run(1, 1);
    run(1, 0);
    run(0, 1);
    run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
