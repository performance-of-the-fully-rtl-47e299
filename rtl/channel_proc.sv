// channel_proc: processing chain of one detector channel.
//
// Aligned samples feed the first-level trigger, the trapezoid energy filter
// and the event buffer. The baseline restorer watches the filter output
// between pulses and its estimate is subtracted at the energy pick-off.
// Real triggers and the idle trigger's fake triggers both go to the event
// buffer, which decides whether a trigger can be taken (free slot, nothing
// outstanding) and only then starts the energy pick-off, so every stored
// event gets the energy of its own pulse. Real triggers raise a GTS request;
// fake ones make idle-tagged events.
//
// Interface: din/din_valid from the deskew FIFO, cfg from the registers,
// timestamp from the GTS leaf, GTS request/reply and the event stream of
// event_buffer; taken_real/energy_real mark the taken triggers and energies
// of real triggers only (idle energies must stay out of the spectrum);
// trig_taken/energy/energy_valid and the aligned sample are
// brought out for the long-trace/spectrum memory and statistics. Timing:
// samples are registered once on entry; see the sub-blocks for latencies.
// The 14-bit unsigned sample is widened to the signed 16-bit datapath, so
// sample[15:14] are always zero.
// The chain follows the paper (trigger and energy modules after the FIFO,
// baseline restorer inside the energy computation).
module channel_proc
  import galileo_pkg::*;
#(
  parameter int TRACE_LEN = 200,
  parameter int PRE_TRIG  = 40,
  parameter int NSLOTS    = 4,
  parameter int TIMEOUT   = galileo_pkg::TIMEOUT_CYC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [5:0]               ch_id,
  input  ch_cfg_t                  cfg,
  input  logic [SAMPLE_W-1:0]      din,
  input  logic                     din_valid,
  input  logic [TS_W-1:0]          timestamp,
  output logic                     gts_req,
  output logic [1:0]               gts_req_slot,
  input  logic                     gts_req_ack,
  input  logic                     rep_valid,
  input  logic [1:0]               rep_slot,
  input  logic                     rep_accept,
  output logic                     out_valid,
  output logic [31:0]              out_data,
  output logic                     out_last,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] sample,
  output logic                     sample_valid,
  output logic                     trig_real,
  output logic                     trig_idle,
  output logic                     trig_taken,
  output logic [ENERGY_W-1:0]      energy,
  output logic                     energy_valid,
  output logic                     taken_real,
  output logic                     energy_real,
  output logic [15:0]              lost_cnt,
  output logic [15:0]              timeout_cnt,
  output logic [15:0]              reject_cnt
);
  localparam int ACC_W_C = 48;

  logic                      v_in;
  logic signed [ACC_W_C-1:0] trap, baseline;
  logic                      e_busy;
  logic                      e_idle;

  assign v_in = din_valid && cfg.enable;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= v_in;
      if (v_in) sample <= DATA_W'($signed({1'b0, din}));
    end
  end

  baseline_restorer #(.ACC_W(ACC_W_C)) u_blr (
    .clk, .rst_n, .din(trap), .din_valid(sample_valid), .pulse(trig_real),
    .blr_en(cfg.blr_en), .blr_shift(cfg.blr_shift), .blr_window(cfg.blr_window),
    .baseline
  );

  trigger_l1 #(.DATA_W(DATA_W)) u_trig (
    .clk, .rst_n, .din(sample), .din_valid(sample_valid),
    .thr(cfg.trig_thr), .diff(cfg.trig_diff), .holdoff(cfg.trig_holdoff),
    .trig(trig_real)
  );

  idle_trigger u_idle (
    .clk, .rst_n, .real_trig(trig_real), .idle_period(cfg.idle_period),
    .idle_trig(trig_idle)
  );

  trapezoid_energy #(.DATA_W(DATA_W), .ACC_W(ACC_W_C)) u_trap (
    .clk, .rst_n, .din(sample), .din_valid(sample_valid), .trig(trig_taken),
    .rise_k(cfg.rise_k), .flat_m(cfg.flat_m), .pz_m(cfg.pz_m), .e_shift(cfg.e_shift), .bl(baseline),
    .trap, .energy, .energy_valid, .busy(e_busy)
  );

  event_buffer #(.TRACE_LEN(TRACE_LEN), .PRE_TRIG(PRE_TRIG), .NSLOTS(NSLOTS),
                 .TIMEOUT(TIMEOUT)) u_evb (
    .clk, .rst_n, .ch_id, .din(sample), .din_valid(sample_valid),
    .trig(trig_real), .idle_trig(trig_idle), .trig_taken,
    .energy, .energy_valid, .timestamp,
    .gts_req, .gts_req_slot, .gts_req_ack, .rep_valid, .rep_slot, .rep_accept,
    .out_valid, .out_data, .out_last, .out_ready,
    .lost_cnt, .timeout_cnt, .reject_cnt
  );

  // Energies of idle (fake) triggers are not detector pulses: keep them out
  // of the spectrum. The event buffer takes a real trigger first, so a taken
  // trigger is idle only when no real one came with it.
  assign taken_real  = trig_taken && trig_real;
  assign energy_real = energy_valid && !e_idle;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          e_idle <= 1'b0;
    else if (trig_taken) e_idle <= !trig_real;
  end

  // A trigger is only taken when the previous energy pick-off has finished.
  a_one_energy: assert property (@(posedge clk) disable iff (!rst_n) trig_taken |-> !e_busy)
    else $error("trigger taken while energy filter busy");
endmodule
