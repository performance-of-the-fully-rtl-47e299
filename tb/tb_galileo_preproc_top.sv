// tb_galileo_preproc_top: end-to-end run of the whole preprocessing FPGA at
// its default size (36 channels, 200-sample traces, 4 slots per channel,
// 20 us time-out, 131072-word long-trace/spectrum RAM).
//
// Stimulus: every channel sees a baseline of 1000 with noise; its samples
// reach the FPGA through a link of its own latency (0..7 cycles). The host
// sets up the channels over the register bus, arms the deskew FIFOs and a
// sync pulse is injected into all channels at once. Then six common pulses
// (steps with a 5000-sample decay, matching the default pole-zero setting)
// hit all channels at the same instant with channel-dependent heights.
// A GTS tree model accepts channel requests, except channel 1 (always
// rejected) and channel 2 (never answered, so its events time out).
// Channel 5 gets extra pulses too close together to be stored (lost
// triggers); channel 3 has the idle trigger on; channel 0 is histogrammed;
// afterwards a triggered long trace of channel 4 is recorded.
//
// The sync pulse is seen by the channels as a short pulse and makes one
// event per channel; the first event is therefore skipped in the checks.
// Checks: alignment status; per-channel event count; energy within 3% of
// A*k*(M+1)/2^20; equal timestamps of the same pulse on all channels
// (deskew works end to end); no events from channels 1 and 2 and their
// reject/time-out counters; lost-trigger counter of channel 5; idle events
// of channel 3; histogram bins equal to the energies of channel 0; the
// long trace holds the pulse; events with the sink always ready leave at
// one word per cycle. Each mechanism must occur at least once.
module tb_galileo_preproc_top;
  import galileo_pkg::*;
  localparam int N = 36, TL = 200, TOTAL = 3 + TL / 2, NP = 6, SPACING = 7000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [SAMPLE_W-1:0] adc_data [N];
  logic [N-1:0] adc_valid = '1;
  logic [19:0] h_addr = 0;
  logic h_wr = 0, h_rd = 0;
  logic [31:0] h_wdata = 0, h_rdata;
  logic ev_valid, ev_last, ev_ready = 0;
  logic [31:0] ev_data;
  logic gts_req_valid, gts_req_ready, gts_rep_valid;
  gts_tag_t gts_req_tag;
  gts_reply_t gts_rep;
  logic gts_ts_load = 0;
  logic [TS_W-1:0] gts_ts_value = 48'h0000_1000_0000, timestamp;
  logic [5:0] ev_ch;
  logic [N-1:0] mon_trig_real, mon_trig_idle, mon_trig_taken, mon_deskew_ovf;

  galileo_preproc_top dut (.*);

  gts_root_model u_gts (.clk, .rst_n, .reject_mask(64'h2), .silent_mask(64'h4),
    .req_valid(gts_req_valid), .req_tag(gts_req_tag), .req_ready(gts_req_ready),
    .rep_valid(gts_rep_valid), .rep(gts_rep));

  // ---------------- ADC + link model ----------------
  int src [N];                         // sample at the ADC
  int pipe [N][8];                     // link latency line
  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      for (int i = 7; i > 0; i--) pipe[c][i] <= pipe[c][i-1];
      pipe[c][0] <= src[c];
    end
  end
  always_comb for (int c = 0; c < N; c++) adc_data[c] = SAMPLE_W'(pipe[c][c % 8]);

  real tail [N];
  function automatic int amp_of(int c, int p);
    return 300 + 60 * c + 150 * p;
  endfunction

  // ---------------- host bus ----------------
  task automatic wr_reg(int a, logic [31:0] d);
    @(negedge clk); h_addr = 20'(a); h_wdata = d; h_wr = 1;
    @(negedge clk); h_wr = 0;
  endtask
  task automatic rd_reg(int a, output logic [31:0] d);
    @(negedge clk); h_addr = 20'(a); h_rd = 1;
    @(negedge clk); h_rd = 0; d = h_rdata;
  endtask

  // ---------------- event sink ----------------
  int widx = 0, cur_ch = 0, start_cyc = 0, cyc = 0;
  bit all_ready = 1;
  logic [31:0] hdr [3];
  int n_ev [N], n_idle_ev [N];
  int energies [N][$];
  longint ts_of [N][$];
  int n_fast = 0;
  bit sink_random = 1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    ev_ready <= sink_random ? ($urandom_range(0, 4) != 0) : 1'b1;
    if (ev_valid && ev_ready) begin
      if (widx == 0) begin start_cyc = cyc; all_ready = 1; cur_ch = int'(ev_data[21:16]); end
      if (widx < 3) hdr[widx] = ev_data;
      if (ev_last) begin
        checks++;
        if (widx != TOTAL - 1 || hdr[0][31:28] != 4'hE || int'(ev_ch) != cur_ch) begin
          failures++; $display("bad event from %0d, %0d words", cur_ch, widx + 1);
        end
        if (hdr[0][27]) n_idle_ev[cur_ch]++;
        else begin
          n_ev[cur_ch]++;
          energies[cur_ch].push_back(int'(hdr[2][15:0]));
          ts_of[cur_ch].push_back(longint'({hdr[1], hdr[2][31:16]}));
        end
        if (all_ready && cyc - start_cyc == TOTAL - 1) n_fast++;
        widx = 0;
      end else widx++;
    end else if (widx != 0) all_ready = 0;
  end

  // ---------------- mechanism counters ----------------
  int n_real = 0, n_idle = 0, n_lost_obs = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++) begin
      if (mon_trig_real[c]) n_real++;
      if (mon_trig_idle[c]) n_idle++;
    end
  end

  initial begin
    logic [31:0] d;
    int n_hist_ok;
    for (int c = 0; c < N; c++) begin
      src[c] = 1000; tail[c] = 0.0; n_ev[c] = 0; n_idle_ev[c] = 0;
      for (int i = 0; i < 8; i++) pipe[c][i] = 1000;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin
        @(negedge clk);
        for (int c = 0; c < N; c++) begin
          tail[c] = tail[c] * $exp(-1.0 / 5000.0);
          if (src[c] < 12000) src[c] = 1000 + int'(tail[c]) + int'($urandom_range(0, 4)) - 2;
        end
      end
    join_none
    // ---- setup
    rd_reg(0, d); checks++; if (d != 32'h4741_4C49) failures++;
    wr_reg('h100 + 8*3 + 2, 32'd5000);            // idle trigger on channel 3
    wr_reg('h100 + 8*5 + 1, 32'd50);              // short trigger hold-off on channel 5
    wr_reg(3, 32'h0000_0003);                     // histogram of channel 0, shift 0
    for (int i = 0; i < 2000; i++) begin          // clear histogram
      @(negedge clk); h_addr = 20'h80000 | 20'(i); h_wdata = 0; h_wr = 1;
    end
    @(negedge clk); h_wr = 0;
    @(negedge clk); gts_ts_load = 1;
    @(negedge clk); gts_ts_load = 0;
    // ---- alignment: arm, then one sync pulse in all channels at once
    wr_reg(1, 32'h1);
    rd_reg(7, d); checks++; if (d[0]) failures++;  // not aligned while waiting
    @(negedge clk); for (int c = 0; c < N; c++) src[c] = 13000;
    @(negedge clk); for (int c = 0; c < N; c++) src[c] = 1000;
    repeat (20) @(negedge clk);
    rd_reg(7, d); checks++; if (!d[0]) begin failures++; $display("not aligned"); end
    repeat (3000) @(negedge clk);                 // baseline restorers settle
    // ---- common pulses
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) tail[c] = tail[c] + amp_of(c, p);
      repeat (120) @(negedge clk);
      tail[5] = tail[5] + 500;                    // within the capture: lost on channel 5
      repeat (SPACING - 120) @(negedge clk);
    end
    repeat (6000) @(negedge clk);
    wr_reg(3, 32'h0);                             // stop the histogram
    // histogram of channel 0 (every computed energy, validated or not)
    n_hist_ok = 0;
    foreach (energies[0][i]) begin
      int cnt;
      cnt = 0;
      foreach (energies[0][j]) if (energies[0][j] == energies[0][i]) cnt++;
      rd_reg(32'h80000 | 32'(energies[0][i]), d);
      checks++;
      if (int'(d) != cnt) begin failures++; $display("bin %0d = %0d want %0d", energies[0][i], d, cnt); end
      else n_hist_ok++;
    end
    // ---- triggered long trace of channel 4
    wr_reg(3, 32'h0000_0402);
    wr_reg(4, 32'd500);
    wr_reg(1, 32'h2);
    repeat (100) @(negedge clk);
    tail[4] = tail[4] + 3000;
    repeat (1500) @(negedge clk);
    sink_random = 0;
    for (int c = 0; c < N; c++) tail[c] = tail[c] + 2000;   // one more event everywhere
    repeat (8000) @(negedge clk);                 // 34 events of 103 words to drain
    wr_reg(3, 32'h0);
    // ---------------- checks ----------------
    for (int c = 0; c < N; c++) begin
      int want_n;
      // the sync pulse itself makes the first event of every channel
      want_n = (c == 1 || c == 2) ? 0 : 1 + NP + 1 + ((c == 4) ? 1 : 0);
      checks++;
      if (n_ev[c] != want_n) begin failures++; $display("ch %0d: %0d events, want %0d", c, n_ev[c], want_n); end
      for (int p = 0; p < NP && p + 1 < energies[c].size(); p++) begin
        real want;
        want = amp_of(c, p) * 200.0 * 5001.0 / 1048576.0;
        if (c != 5) begin                         // channel 5 has pile-up
          checks++;
          if (energies[c][p+1] < 0.97 * want || energies[c][p+1] > 1.03 * want) begin
            failures++; $display("ch %0d pulse %0d energy %0d want %f", c, p, energies[c][p+1], want);
          end
        end
        checks++;
        if (ts_of[c][p+1] != ts_of[0][p+1]) begin
          failures++; $display("ch %0d pulse %0d ts %0d vs ch0 %0d", c, p, ts_of[c][p+1], ts_of[0][p+1]);
        end
      end
    end
    rd_reg('h100 + 8*1 + 6, d); checks++; if (d[31:16] != 16'(NP + 2)) begin failures++; $display("ch1 rejects %0d", d[31:16]); end
    rd_reg('h100 + 8*2 + 7, d); checks++; if (d[15:0] != 16'(NP + 2)) begin failures++; $display("ch2 timeouts %0d", d[15:0]); end
    rd_reg('h100 + 8*5 + 6, d); n_lost_obs = int'(d[15:0]);
    checks++; if (n_lost_obs != NP) begin failures++; $display("ch5 lost %0d", n_lost_obs); end
    checks++; if (n_idle_ev[3] < 2) begin failures++; $display("ch3 idle events %0d", n_idle_ev[3]); end
    // long trace: the 3000-count pulse of channel 4 is in the record
    begin
      int mx;
      mx = -100000;
      rd_reg(7, d); checks++; if (!d[2]) begin failures++; $display("long trace not done"); end
      for (int i = 0; i < 500; i++) begin
        rd_reg(32'h80000 | 32'(i), d);
        if (int'($signed(d[15:0])) > mx) mx = int'($signed(d[15:0]));
        if (int'($signed(d[31:16])) > mx) mx = int'($signed(d[31:16]));
      end
      checks++; if (mx < 2500) begin failures++; $display("long trace max %0d", mx); end
    end
    // ---------------- mechanism coverage ----------------
    $display("mechanisms: real triggers %0d, idle triggers %0d, lost %0d, rejected ch1, timed out ch2, histogram bins %0d, events at full rate %0d, deskew overflow %0d",
             n_real, n_idle, n_lost_obs, n_hist_ok, n_fast, mon_deskew_ovf);
    checks++; if (n_real == 0) failures++;
    checks++; if (n_idle == 0) failures++;
    checks++; if (n_lost_obs == 0) failures++;
    checks++; if (n_hist_ok == 0) failures++;
    checks++; if (n_fast == 0) begin failures++; $display("no event at one word per cycle"); end
    checks++; if (u_gts.n_rej == 0 || u_gts.n_silent == 0 || u_gts.n_acc == 0) failures++;
    checks++; if (mon_deskew_ovf != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
