// Self-checking testbench of axis_rr_interconnect (16 inputs).
//
// Every input sends random frames (1 to 8 words; the data carry input
// number, frame number and word number) with random gaps; the output sink
// has random TREADY. Checks: each output word is the next expected word of
// the input named by m_tid, frames are never interleaved, all frames
// arrive, and when all inputs always have data, grants rotate in strict
// round-robin order 0, 1, ..., 15, 0, ...
module tb_axis_rr_interconnect;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [63:0] s_tdata [N];
  logic [7:0]  s_tkeep [N];
  logic [N-1:0] s_tlast, s_tvalid, s_tready;
  logic [63:0] m_tdata;
  logic [7:0]  m_tkeep;
  logic m_tlast, m_tvalid, m_tready;
  logic [3:0] m_tid;
  int checks = 0, failures = 0;
  bit saturate = 0;
  always #4 clk = ~clk;

  axis_rr_interconnect dut (.*);

  localparam int NF = 40;
  int flen [N][NF];
  int sent_f [N], sent_w [N];     // source position
  int recv_f [N], recv_w [N];     // sink expectation
  int cur_id = -1;
  int last_grant = -1, rr_checks = 0;

  initial begin
    for (int i = 0; i < N; i++) begin
      for (int f = 0; f < NF; f++) flen[i][f] = $urandom_range(1, 8);
      sent_f[i] = 0; sent_w[i] = 0; recv_f[i] = 0; recv_w[i] = 0;
      s_tvalid[i] = 0; s_tdata[i] = '0; s_tkeep[i] = '0; s_tlast[i] = 0;
    end
  end

  // sources: drive at negedge, hold until accepted
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (s_tvalid[i] && s_tready[i]) begin
        // word was taken at the last posedge (sampled below)
      end
      if (!s_tvalid[i] && sent_f[i] < NF && (saturate || $urandom_range(0, 2) == 0)) begin
        s_tvalid[i] = 1'b1;
        s_tdata[i]  = {16'(i), 16'(sent_f[i]), 32'(sent_w[i])};
        s_tkeep[i]  = 8'hFF;
        s_tlast[i]  = (sent_w[i] == flen[i][sent_f[i]] - 1);
      end
    end
    m_tready = saturate ? 1'b1 : ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (s_tvalid[i] && s_tready[i]) begin
        if (s_tlast[i]) begin sent_f[i]++; sent_w[i] = 0; end
        else sent_w[i]++;
        s_tvalid[i] <= 1'b0;
      end
    end
    if (m_tvalid && m_tready) begin
      int id, x;
      id = int'(m_tid);
      checks++;
      if (cur_id >= 0 && id != cur_id) begin failures++; $display("frames interleaved"); end
      if (cur_id < 0) begin
        if (saturate && last_grant >= 0) begin
          rr_checks++;
          checks++;
          x = (last_grant + 1) % N;
          while (recv_f[x] >= NF && x != last_grant) x = (x + 1) % N;
          if (id != x) begin
            failures++; $display("round robin: %0d after %0d, expected %0d", id, last_grant, x);
          end
        end
        last_grant = id;
      end
      if (m_tdata !== {16'(id), 16'(recv_f[id]), 32'(recv_w[id])} ||
          m_tlast !== (recv_w[id] == flen[id][recv_f[id]] - 1)) begin
        failures++;
        if (failures < 10) $display("input %0d frame %0d word %0d wrong", id, recv_f[id], recv_w[id]);
      end
      cur_id = m_tlast ? -1 : id;
      if (m_tlast) begin recv_f[id]++; recv_w[id] = 0; end
      else recv_w[id]++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (3000) @(posedge clk);
    saturate = 1;
    repeat (6000) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (recv_f[i] != NF) begin failures++; $display("input %0d: %0d of %0d frames", i, recv_f[i], NF); end
    end
    checks++;
    if (rr_checks < 2 * N) begin failures++; $display("round robin barely exercised (%0d)", rr_checks); end
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
