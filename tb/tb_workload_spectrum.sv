// tb_workload_spectrum: the single-detector spectrum measurement, run through
// the whole board at its default parameters. Channel 0 sees preamplifier
// pulses (steps with a 50 us decay) of the three gamma lines of an 241Am +
// 60Co source, 59.6, 1173.2 and 1332.5 keV, in random order and at random
// spacing (30 to 90 us, so each pulse sits on the tail of the one before).
// The channel's energies are histogrammed online in the long-trace/spectrum
// RAM, with bin = energy.
//
// Energy scale: the 0-7 MeV input range over 14 bits gives 7000/16384 keV
// per ADC code; the default trapezoid (k = 200, M = 5000, shift 20) has a
// gain of k*(M+1)/2^20, so a line of E keV is expected at
// E * 16384/7000 * 200*5001/2^20 (about 133, 2619 and 2975).
// Checks, from that formula: every pulse is counted once in the spectrum;
// each line's counts sit within 2% of its expected bin; the centroid of
// each line is within 0.5% (1.5 bins for the 59.6 keV line) of it; each
// line is at most 8 bins wide with the +-2 code input noise used here. The
// width found is printed in keV. The energy resolution of a real detector
// depends on its analog chain and is not modelled.
module tb_workload_spectrum;
  import galileo_pkg::*;
  localparam int N = 36, NL = 3, PER_LINE = 30, NBINS = 4096;
  localparam real KEV_PER_CODE = 7000.0 / 16384.0;
  localparam real GAIN = 200.0 * 5001.0 / 1048576.0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [SAMPLE_W-1:0] adc_data [N];
  logic [N-1:0] adc_valid = '1;
  logic [19:0] h_addr = 0;
  logic h_wr = 0, h_rd = 0;
  logic [31:0] h_wdata = 0, h_rdata;
  logic ev_valid, ev_last, ev_ready = 1;
  logic [31:0] ev_data;
  logic gts_req_valid, gts_req_ready, gts_rep_valid;
  gts_tag_t gts_req_tag;
  gts_reply_t gts_rep;
  logic gts_ts_load = 0;
  logic [TS_W-1:0] gts_ts_value = '0, timestamp;
  logic [5:0] ev_ch;
  logic [N-1:0] mon_trig_real, mon_trig_idle, mon_trig_taken, mon_deskew_ovf;

  galileo_preproc_top dut (.*);

  gts_root_model u_gts (.clk, .rst_n, .reject_mask(64'h0), .silent_mask(64'h0),
    .req_valid(gts_req_valid), .req_tag(gts_req_tag), .req_ready(gts_req_ready),
    .rep_valid(gts_rep_valid), .rep(gts_rep));

  real line_kev [NL] = '{59.6, 1173.2, 1332.5};
  real tail = 0.0;
  int  src0 = 1000;
  always_comb begin
    adc_data[0] = SAMPLE_W'(src0);
    for (int c = 1; c < N; c++) adc_data[c] = SAMPLE_W'(1000);
  end

  task automatic wr_reg(int a, logic [31:0] d);
    @(negedge clk); h_addr = 20'(a); h_wdata = d; h_wr = 1;
    @(negedge clk); h_wr = 0;
  endtask
  task automatic rd_reg(int a, output logic [31:0] d);
    @(negedge clk); h_addr = 20'(a); h_rd = 1;
    @(negedge clk); h_rd = 0; d = h_rdata;
  endtask

  int n_ev = 0;
  always @(posedge clk) if (rst_n && ev_valid && ev_ready && ev_last) n_ev++;

  initial begin
    logic [31:0] d;
    int hist [NBINS];
    int order [$];
    int total;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin
        @(negedge clk);
        tail = tail * $exp(-1.0 / 5000.0);
        src0 = 1000 + int'(tail) + int'($urandom_range(0, 4)) - 2;
      end
    join_none
    wr_reg(3, 32'h0000_0003);                     // histogram of channel 0, bin = energy
    for (int i = 0; i < NBINS; i++) begin         // clear the spectrum
      @(negedge clk); h_addr = 20'h80000 | 20'(i); h_wdata = 0; h_wr = 1;
    end
    @(negedge clk); h_wr = 0;
    repeat (3000) @(negedge clk);                 // baseline restorer settles
    for (int l = 0; l < NL; l++) for (int i = 0; i < PER_LINE; i++) order.push_back(l);
    order.shuffle();
    foreach (order[p]) begin
      @(negedge clk);
      tail = tail + line_kev[order[p]] / KEV_PER_CODE;
      repeat (int'($urandom_range(3000, 9000))) @(negedge clk);
    end
    repeat (3000) @(negedge clk);
    wr_reg(3, 32'h0);
    total = 0;
    for (int i = 0; i < NBINS; i++) begin
      rd_reg(32'h80000 | i, d);
      hist[i] = int'(d);
      total += hist[i];
    end
    checks++;
    if (total != NL * PER_LINE) begin failures++; $display("spectrum holds %0d counts, want %0d", total, NL * PER_LINE); end
    for (int l = 0; l < NL; l++) begin
      real want, sum, wsum, tol;
      int lo, hi, first, last;
      want = line_kev[l] / KEV_PER_CODE * GAIN;
      lo = int'(want * 0.98) - 1; hi = int'(want * 1.02) + 1;
      sum = 0; wsum = 0; first = -1; last = -1;
      for (int b = lo; b <= hi; b++) if (hist[b] != 0) begin
        sum += hist[b]; wsum += real'(b) * hist[b];
        if (first < 0) first = b;
        last = b;
      end
      checks++;
      if (int'(sum) != PER_LINE) begin failures++; $display("line %0d: %0d counts near bin %f", l, int'(sum), want); end
      if (sum > 0) begin
        tol = (want * 0.005 > 1.5) ? want * 0.005 : 1.5;
        checks++;
        if (wsum / sum < want - tol || wsum / sum > want + tol) begin
          failures++; $display("line %0d: centroid %f, want %f", l, wsum / sum, want);
        end
        checks++;
        if (last - first > 8) begin failures++; $display("line %0d: %0d bins wide", l, last - first + 1); end
        $display("%7.1f keV: centroid %8.2f (expected %8.2f), full width %0d bins = %5.2f keV",
                 line_kev[l], wsum / sum, want, last - first + 1,
                 real'(last - first + 1) * KEV_PER_CODE / GAIN);
      end
    end
    checks++;
    if (n_ev != NL * PER_LINE) begin failures++; $display("%0d events read out", n_ev); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
