// Noise reduction by the moving average, on the DSP module at its default
// size (8 lanes, 64-sample BLR, 8-sample moving average).
//
// The input is white Gaussian noise of 2.1 counts RMS on a zero baseline
// (Box-Muller from $urandom, rounded to whole 12-bit counts; random bits
// fill the 4 truncated LSBs). The RMS about the mean of the output is
// measured over 20000 words (160000 samples) for each of the four
// BLR/moving-average settings.
//
// For white noise of sigma counts, an 8-sample mean floored to a whole
// count has an RMS of sqrt(sigma^2/8 + 1/12): 0.80 counts for sigma = 2.12
// (2.1 plus the rounding of the input). The checks: without the moving
// average the output RMS equals the input RMS within 3 %; with it, the
// RMS is 0.80 within 0.05; BLR adds less than 0.1 count in either case.
// Real ADC noise is not white (the measured improvement was to 0.8-0.9
// counts), so only the white-noise figure is checked here.
module tb_workload_noise;
  localparam int NWD   = 20000;
  localparam real SIG  = 2.1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [127:0] s_tdata, m_tdata;
  logic         s_tvalid, m_tvalid, blr_en, ma_en;

  dsp_module dut (.clk, .rst_n, .s_tdata, .s_tvalid, .blr_en, .ma_en, .m_tdata, .m_tvalid);

  int checks = 0, failures = 0;
  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // output statistics, accumulated while `meas` is set
  bit  meas = 1'b0;
  real s1, s2, n;
  always @(posedge clk) if (meas && m_tvalid)
    for (int l = 0; l < 8; l++) begin
      s1 += real'($signed(m_tdata[16*l +: 16]));
      s2 += real'($signed(m_tdata[16*l +: 16])) ** 2;
      n  += 1.0;
    end

  real in_s1, in_s2, in_n;

  task automatic run(input bit blr, input bit ma, output real rms);
    int v;
    @(negedge clk) blr_en = blr; ma_en = ma;
    repeat (100) @(negedge clk);     // fill the filter histories
    s1 = 0; s2 = 0; n = 0; meas = 1'b1;
    for (int w = 0; w < NWD; w++) begin
      @(negedge clk);
      for (int l = 0; l < 8; l++) begin
        v = $rtoi(SIG * gauss() + 1000.5) - 1000;     // round to nearest
        in_s1 += real'(v); in_s2 += real'(v) ** 2; in_n += 1.0;
        s_tdata[16*l +: 16] = {12'(v), 4'($urandom_range(15))};
      end
    end
    repeat (5) @(negedge clk);
    meas = 1'b0;
    rms = $sqrt(s2 / n - (s1 / n) ** 2);
    $display("BLR %s, moving average %s: output RMS %.3f counts, mean %.3f",
             blr ? "on " : "off", ma ? "on " : "off", rms, s1 / n);
  endtask

  initial begin
    real r00, r01, r10, r11, rin, ma_exp;
    s_tdata = '0; s_tvalid = 1'b1; blr_en = 1'b0; ma_en = 1'b0;
    in_s1 = 0; in_s2 = 0; in_n = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    run(1'b0, 1'b0, r00);
    run(1'b0, 1'b1, r01);
    run(1'b1, 1'b0, r10);
    run(1'b1, 1'b1, r11);
    rin = $sqrt(in_s2 / in_n - (in_s1 / in_n) ** 2);
    ma_exp = $sqrt(rin * rin / 8.0 + 1.0 / 12.0);
    $display("input RMS %.3f counts; expected with moving average %.3f", rin, ma_exp);
    chk("input noise is as generated", rin > 2.05 && rin < 2.2);
    chk("no filtering: output RMS = input RMS", r00 > 0.97 * rin && r00 < 1.03 * rin);
    chk("moving average: RMS as for white noise", r01 > ma_exp - 0.05 && r01 < ma_exp + 0.05);
    chk("moving average: RMS below 0.85 counts", r01 < 0.85);
    chk("BLR adds little noise without moving average", r10 - r00 < 0.1);
    chk("BLR adds little noise with moving average", r11 - r01 < 0.1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * NWD + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
