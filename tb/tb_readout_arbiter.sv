// tb_readout_arbiter: 6 sources each offer packets of random length whose
// words encode {source, packet number, word index}. The sink applies random
// back-pressure in a first phase and none in a second. Checks: every packet
// arrives whole and uninterrupted, in order per source, with last on its
// final word; m_ch names the source; and with the sink always ready a
// packet of L words takes exactly L cycles (one 32-bit word per cycle, the
// 400 MB/s of the host link at 100 MHz).
module tb_readout_arbiter;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] s_valid = 0, s_last, s_ready;
  logic [31:0] s_data [N];
  logic m_valid, m_last, m_ready = 0;
  logic [31:0] m_data;
  logic [5:0] m_ch;

  readout_arbiter #(.NUM_CH(N)) dut (.*);

  int pkt [N], idx [N], len [N], exp_pkt [N];
  int total_pkts = 0;
  bit stall_phase = 1, m_ready_all = 0;

  always_comb for (int c = 0; c < N; c++) begin
    s_data[c] = {8'(c), 8'(pkt[c]), 16'(idx[c])};
    s_last[c] = (idx[c] == len[c] - 1);
  end

  // sources
  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (s_valid[c] && s_ready[c]) begin
        if (s_last[c]) begin
          s_valid[c] <= 1'b0;
          pkt[c] <= pkt[c] + 1;
          idx[c] <= 0;
        end else idx[c] <= idx[c] + 1;
      end else if (!s_valid[c] && rst_n && pkt[c] < 15 && $urandom_range(0, 3) == 0) begin
        s_valid[c] <= 1'b1;
        len[c] <= $urandom_range(1, 40);
      end
    end
  end

  // sink
  int cur = -1, cur_idx = 0, cur_start = 0, cyc = 0;
  bit timed = 0;   // packet started with the sink already always ready
  always @(posedge clk) begin
    cyc <= cyc + 1;
    m_ready <= stall_phase ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (!stall_phase && m_ready) m_ready_all <= 1'b1;
    if (m_valid && m_ready) begin
      int c, p, w;
      c = int'(m_data[31:24]); p = int'(m_data[23:16]); w = int'(m_data[15:0]);
      checks++;
      if (cur == -1) begin
        cur = c; cur_idx = 0; cur_start = cyc; timed = !stall_phase && m_ready_all;
        if (p != exp_pkt[c]) begin failures++; $display("src %0d pkt %0d expected %0d", c, p, exp_pkt[c]); end
      end
      if (c != cur || w != cur_idx || m_ch != 6'(c)) begin
        failures++; $display("interleave: src %0d word %0d (cur %0d idx %0d)", c, w, cur, cur_idx);
      end
      cur_idx++;
      if (m_last) begin
        checks++;
        if (cur_idx != len[c]) begin failures++; $display("short packet"); end
        if (timed) begin
          checks++;
          if (cyc - cur_start + 1 != len[c]) begin failures++; $display("packet of %0d took %0d", len[c], cyc - cur_start + 1); end
        end
        exp_pkt[c]++;
        total_pkts++;
        cur = -1;
      end
    end
  end

  initial begin
    for (int c = 0; c < N; c++) begin pkt[c] = 0; idx[c] = 0; len[c] = 1; exp_pkt[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    stall_phase = 0;
    wait (total_pkts == 15 * N);
    repeat (5) @(posedge clk);
    checks++;
    if (total_pkts != 15 * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
