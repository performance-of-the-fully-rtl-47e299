// tb_channel_proc: one complete channel fed with preamplifier-like pulses
// (step, then exponential decay of 500 samples) on a noisy baseline of 1000.
// Filter settings k = 50, m = 20, M = 500, energy shift 12, so a pulse of
// height A should give the flat-top value A*k*(M+1) >> 12, about 6.116*A.
// A GTS model accepts every request after a short delay. Checks: one
// accepted event per pulse, in order, each with energy within 2% of the
// expected value; the trace header carries the channel; after the pulses
// stop, the idle trigger produces idle-tagged events at the set period;
// only the energies of the real pulses are flagged for the spectrum.
module tb_channel_proc;
  import galileo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ch_cfg_t cfg;
  logic [13:0] din = 14'd1000;
  logic [47:0] timestamp = 0;
  logic gts_req, gts_req_ack = 0, rep_valid = 0, rep_accept = 1;
  logic [1:0] gts_req_slot, rep_slot = 0;
  logic out_valid, out_last;
  logic [31:0] out_data;
  logic signed [15:0] sample;
  logic sample_valid, trig_real, trig_idle, trig_taken, energy_valid;
  logic [15:0] energy, lost_cnt, timeout_cnt, reject_cnt;
  logic taken_real, energy_real;
  int n_e_all = 0, n_e_real = 0;
  always @(posedge clk) begin
    if (rst_n && energy_valid) n_e_all++;
    if (rst_n && energy_real) n_e_real++;
  end

  channel_proc #(.TRACE_LEN(40), .PRE_TRIG(8)) dut (
    .clk, .rst_n, .ch_id(6'd17), .cfg, .din, .din_valid(1'b1), .timestamp,
    .gts_req, .gts_req_slot, .gts_req_ack, .rep_valid, .rep_slot, .rep_accept,
    .out_valid, .out_data, .out_last, .out_ready(1'b1),
    .sample, .sample_valid, .trig_real, .trig_idle, .trig_taken, .energy, .energy_valid,
    .taken_real, .energy_real,
    .lost_cnt, .timeout_cnt, .reject_cnt);

  localparam int NP = 8, SPACING = 4000, IDLE = 6000;
  int amps [NP] = '{300, 800, 1500, 2500, 3500, 5000, 6500, 8000};
  real tail = 0.0;
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    timestamp <= timestamp + 1;
  end

  // GTS model: acknowledge, then accept after 30 cycles
  always @(posedge clk) begin
    gts_req_ack <= rst_n && gts_req && !gts_req_ack;
    if (rst_n && gts_req && !gts_req_ack)
      fork
        automatic logic [1:0] s = gts_req_slot;
        begin
          repeat (30) @(negedge clk);
          rep_valid = 1; rep_slot = s; rep_accept = 1;
          @(negedge clk) rep_valid = 0;
        end
      join_none
  end

  // sink: collect headers
  int widx = 0, n_ev = 0, n_idle = 0;
  int got_e [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    if (widx == 0) begin
      checks++;
      if (out_data[31:28] != 4'hE || out_data[21:16] != 6'd17) failures++;
      if (out_data[27]) n_idle++;
    end
    if (widx == 2 && !dut.u_evb.is_idle[dut.u_evb.rd_slot]) got_e.push_back(int'(out_data[15:0]));
    if (out_last) begin widx = 0; n_ev++; end else widx++;
  end

  initial begin
    cfg = '0;
    cfg.trig_thr = 16'd100; cfg.trig_diff = 4'd4; cfg.trig_holdoff = 16'd250;
    cfg.idle_period = 32'(IDLE);
    cfg.rise_k = 10'd50; cfg.flat_m = 10'd20; cfg.pz_m = 16'd500; cfg.e_shift = 6'd12;
    cfg.blr_shift = 4'd4; cfg.blr_window = 16'd300; cfg.blr_en = 1'b1; cfg.enable = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1500) begin
      @(negedge clk) din = 14'(1000 + int'($urandom_range(0, 4)) - 2);
    end
    for (int p = 0; p < NP; p++) begin
      tail = 0.0;
      for (int i = 0; i < SPACING; i++) begin
        if (i == 0) tail = amps[p];
        else tail = tail * $exp(-1.0 / 500.0);
        @(negedge clk) din = 14'(1000 + int'(tail) + int'($urandom_range(0, 4)) - 2);
      end
    end
    // quiet period: idle events only
    repeat (3 * IDLE + 500) begin
      @(negedge clk) din = 14'(1000 + int'($urandom_range(0, 4)) - 2);
    end
    checks++;
    if (got_e.size() != NP) begin failures++; $display("%0d energies for %0d pulses", got_e.size(), NP); end
    for (int p = 0; p < NP && p < got_e.size(); p++) begin
      real want;
      want = amps[p] * 50.0 * 501.0 / 4096.0;
      checks++;
      if (got_e[p] < 0.98 * want || got_e[p] > 1.02 * want) begin
        failures++; $display("pulse %0d energy %0d want %f", p, got_e[p], want);
      end
    end
    checks++;
    if (n_idle < 3) begin failures++; $display("%0d idle events", n_idle); end
    // only the energies of real pulses are marked for the spectrum
    checks++;
    if (n_e_real != NP || n_e_all != NP + n_idle) begin
      failures++; $display("energies: %0d real of %0d, %0d idle events", n_e_real, n_e_all, n_idle);
    end
    checks++;
    if (lost_cnt != 0 || reject_cnt != 0 || timeout_cnt != 0) failures++;
    $display("events %0d idle %0d", n_ev, n_idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
