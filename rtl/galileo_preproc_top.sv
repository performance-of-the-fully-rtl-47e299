// galileo_preproc_top: preprocessing FPGA of one board (36 channels).
//
// Decoded 14-bit, 100 Msps samples of 36 channels (three 12-channel
// digitizer boards) enter through per-channel deskew FIFOs, which line the
// channels up on an injected sync pulse. Each channel then runs its own
// chain (channel_proc): first-level trigger, idle trigger, trapezoid
// energy filter with its baseline restorer, and an event buffer that keeps energy,
// timestamp and a short trace until the GTS tree validates the trigger.
// The GTS leaf sends trigger requests to the tree, keeps the global
// timestamp and returns the replies. Accepted events of all channels are
// merged into one 32-bit stream (400 MB/s at 100 MHz) for the host link.
// One channel at a time can also feed the long-trace/spectrum RAM.
// Everything is set up through the host register bus.
//
// Ports: adc_* are the outputs of the link decoders; h_* is the host bus
// (word address; h_addr[19] = 1 selects the long-trace/spectrum RAM, else
// the register file); ev_* is the event stream to the host link; gts_* is
// the link to the GTS tree; mon_* are per-channel trigger and overflow
// strobes for monitoring. All on one 100 MHz clock (the GTS clock);
// h_rdata is valid the cycle after h_rd.
// The partition into these blocks follows the paper's description of the
// board; the link decoders and the PCIe endpoint are outside this module.
module galileo_preproc_top
  import galileo_pkg::*;
#(
  parameter int NUM_CH    = galileo_pkg::NUM_CH,
  parameter int TRACE_LEN = 200,
  parameter int PRE_TRIG  = 40,
  parameter int NSLOTS    = 4,
  parameter int TIMEOUT   = galileo_pkg::TIMEOUT_CYC,
  parameter int LT_DEPTH  = 131072,
  parameter int DESKEW_DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // link decoder outputs
  input  logic [SAMPLE_W-1:0] adc_data  [NUM_CH],
  input  logic [NUM_CH-1:0]   adc_valid,
  // host bus
  input  logic [19:0]         h_addr,
  input  logic                h_wr,
  input  logic [31:0]         h_wdata,
  input  logic                h_rd,
  output logic [31:0]         h_rdata,
  // event stream to the host link
  output logic                ev_valid,
  output logic [31:0]         ev_data,
  output logic                ev_last,
  input  logic                ev_ready,
  // GTS tree
  output logic                gts_req_valid,
  output gts_tag_t            gts_req_tag,
  input  logic                gts_req_ready,
  input  logic                gts_rep_valid,
  input  gts_reply_t          gts_rep,
  input  logic                gts_ts_load,
  input  logic [TS_W-1:0]     gts_ts_value,
  output logic [TS_W-1:0]     timestamp,
  // monitoring
  output logic [5:0]          ev_ch,
  output logic [NUM_CH-1:0]   mon_trig_real,
  output logic [NUM_CH-1:0]   mon_trig_idle,
  output logic [NUM_CH-1:0]   mon_trig_taken,
  output logic [NUM_CH-1:0]   mon_deskew_ovf
);
  localparam int LAW = $clog2(LT_DEPTH);

  // ---------------- registers ----------------
  ch_cfg_t             cfg [NUM_CH];
  logic                deskew_arm, lt_arm, reg_ts_load;
  logic [SAMPLE_W-1:0] sync_thr;
  lt_mode_e            lt_mode;
  logic [5:0]          lt_ch;
  logic [3:0]          lt_hshift;
  logic [31:0]         lt_len;
  logic [TS_W-1:0]     reg_ts_value;
  logic                lt_busy, lt_done, aligned;
  logic [15:0]         hist_drop;
  logic [15:0]         lost_cnt [NUM_CH], timeout_cnt [NUM_CH], reject_cnt [NUM_CH];
  logic [31:0]         reg_rdata, ram_rdata;
  logic                reg_sel, ram_sel, ram_rd_q;

  assign ram_sel = h_addr[19];
  assign reg_sel = !h_addr[19];

  slow_ctrl_regs #(.NUM_CH(NUM_CH)) u_regs (
    .clk, .rst_n,
    .addr(h_addr[11:0]), .wr(h_wr && reg_sel), .wdata(h_wdata), .rd(h_rd && reg_sel),
    .rdata(reg_rdata),
    .cfg, .deskew_arm, .lt_arm, .ts_load(reg_ts_load), .sync_thr,
    .lt_mode, .lt_ch, .lt_hshift, .lt_len, .ts_value(reg_ts_value),
    .aligned, .lt_busy, .lt_done, .hist_drop, .timestamp,
    .lost_cnt, .reject_cnt, .timeout_cnt
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ram_rd_q <= 1'b0;
    else if (h_rd) ram_rd_q <= ram_sel;
  end
  assign h_rdata = ram_rd_q ? ram_rdata : reg_rdata;

  // ---------------- deskew ----------------
  logic [NUM_CH-1:0]   sync_seen, al_valid;
  logic [SAMPLE_W-1:0] al_data [NUM_CH];

  assign aligned = &sync_seen;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_dsk
    deskew_fifo #(.SAMPLE_W(SAMPLE_W), .DEPTH(DESKEW_DEPTH)) u_dsk (
      .clk, .rst_n, .din(adc_data[c]), .din_valid(adc_valid[c]),
      .arm(deskew_arm), .sync_thr, .release_i(aligned),
      .sync_seen(sync_seen[c]), .dout(al_data[c]), .dout_valid(al_valid[c]),
      .overflow(mon_deskew_ovf[c])
    );
  end

  // ---------------- GTS leaf ----------------
  logic [NUM_CH-1:0] ch_req, ch_req_ack, rep_valid;
  logic [1:0]        ch_req_slot [NUM_CH];
  logic [1:0]        rep_slot;
  logic              rep_accept;

  gts_leaf #(.NUM_CH(NUM_CH)) u_gts (
    .clk, .rst_n,
    .ts_load(gts_ts_load || reg_ts_load),
    .ts_value(gts_ts_load ? gts_ts_value : reg_ts_value),
    .timestamp,
    .ch_req, .ch_req_slot, .ch_req_ack, .rep_valid, .rep_slot, .rep_accept,
    .gts_req_valid, .gts_req_tag, .gts_req_ready, .gts_rep_valid, .gts_rep
  );

  // ---------------- channels ----------------
  logic [NUM_CH-1:0]        s_valid, s_last, s_ready;
  logic [31:0]              s_data [NUM_CH];
  logic signed [DATA_W-1:0] smp [NUM_CH];
  logic [NUM_CH-1:0]        smp_valid, trig_real, trig_idle, trig_taken, e_valid;
  logic [NUM_CH-1:0]        taken_real, e_real;

  assign mon_trig_real  = trig_real;
  assign mon_trig_idle  = trig_idle;
  assign mon_trig_taken = trig_taken;
  logic [ENERGY_W-1:0]      e_val [NUM_CH];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    channel_proc #(.TRACE_LEN(TRACE_LEN), .PRE_TRIG(PRE_TRIG), .NSLOTS(NSLOTS),
                   .TIMEOUT(TIMEOUT)) u_ch (
      .clk, .rst_n, .ch_id(6'(c)), .cfg(cfg[c]),
      .din(al_data[c]), .din_valid(al_valid[c]), .timestamp,
      .gts_req(ch_req[c]), .gts_req_slot(ch_req_slot[c]), .gts_req_ack(ch_req_ack[c]),
      .rep_valid(rep_valid[c]), .rep_slot, .rep_accept,
      .out_valid(s_valid[c]), .out_data(s_data[c]), .out_last(s_last[c]),
      .out_ready(s_ready[c]),
      .sample(smp[c]), .sample_valid(smp_valid[c]),
      .trig_real(trig_real[c]), .trig_idle(trig_idle[c]), .trig_taken(trig_taken[c]),
      .energy(e_val[c]), .energy_valid(e_valid[c]),
      .taken_real(taken_real[c]), .energy_real(e_real[c]),
      .lost_cnt(lost_cnt[c]), .timeout_cnt(timeout_cnt[c]), .reject_cnt(reject_cnt[c])
    );
  end

  // ---------------- readout ----------------
  readout_arbiter #(.NUM_CH(NUM_CH)) u_ro (
    .clk, .rst_n, .s_valid, .s_data, .s_last, .s_ready,
    .m_valid(ev_valid), .m_data(ev_data), .m_last(ev_last), .m_ready(ev_ready),
    .m_ch(ev_ch)
  );

  // ---------------- long traces and spectra ----------------
  logic [5:0] lt_sel;
  assign lt_sel = (int'(lt_ch) < NUM_CH) ? lt_ch : '0;

  spectra_trace_ram #(.DEPTH(LT_DEPTH)) u_lt (
    .clk, .rst_n, .mode(lt_mode), .arm(lt_arm), .len(lt_len[LAW:0]), .h_shift(lt_hshift),
    .din(smp[lt_sel]), .din_valid(smp_valid[lt_sel]), .trig(taken_real[lt_sel]),
    .energy(e_val[lt_sel]), .energy_valid(e_real[lt_sel]),
    .lt_busy, .lt_done, .hist_drop,
    .h_addr(h_addr[LAW-1:0]), .h_rd(h_rd && ram_sel), .h_wr(h_wr && ram_sel),
    .h_wdata, .h_rdata(ram_rdata)
  );
endmodule
