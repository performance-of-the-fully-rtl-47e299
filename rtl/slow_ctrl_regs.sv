// slow_ctrl_regs: host-visible register file of the preprocessing FPGA.
//
// The host maps these registers into its memory and sets up the whole
// processing chain through them: filter, trigger and baseline parameters of
// every channel, alignment and long-trace controls, the GTS timestamp
// preset, and it reads back status and per-channel event statistics.
//
// Word address map (32-bit registers):
//   0x000 ID, reads 0x47414C49
//   0x001 control, write-only pulses: [0] deskew arm, [1] long-trace arm,
//         [2] timestamp load
//   0x002 sync threshold [13:0]
//   0x003 long-trace/spectrum: [1:0] mode, [13:8] channel, [19:16] bin shift
//   0x004 long-trace length in words
//   0x005 timestamp preset [31:0];  0x006 timestamp preset [47:32]
//   0x007 status (RO): [0] aligned, [1] long trace busy, [2] long trace done,
//         [31:16] histogram drops
//   0x008 timestamp [31:0] (RO);  0x009 timestamp [47:32] (RO)
//   0x100 + 8*ch + n, per channel:
//     n=0 [15:0] trigger threshold, [19:16] differentiator D,
//         [30] baseline restorer on, [31] channel enable
//     n=1 trigger hold-off;  n=2 idle period (0 = off)
//     n=3 [9:0] rise k, [25:16] flat top m
//     n=4 [15:0] pole-zero M, [21:16] energy shift
//     n=5 [15:0] baseline window, [19:16] baseline shift
//     n=6 (RO) [15:0] lost triggers, [31:16] rejected events
//     n=7 (RO) [15:0] timed-out events
// Interface: single-cycle write (wr, addr, wdata); read data valid the
// cycle after rd. Reset gives usable defaults (see below).
// The paper says only that the FPGA registers are mapped to host memory and
// hold filter parameters and slow-control values; the map is a choice here.
module slow_ctrl_regs
  import galileo_pkg::ch_cfg_t, galileo_pkg::lt_mode_e, galileo_pkg::TS_W,
         galileo_pkg::SAMPLE_W;
#(
  parameter int NUM_CH = 36
) (
  input  logic                clk,
  input  logic                rst_n,
  // host bus
  input  logic [11:0]         addr,
  input  logic                wr,
  input  logic [31:0]         wdata,
  input  logic                rd,
  output logic [31:0]         rdata,
  // configuration
  output ch_cfg_t             cfg [NUM_CH],
  output logic                deskew_arm,
  output logic                lt_arm,
  output logic                ts_load,
  output logic [SAMPLE_W-1:0] sync_thr,
  output lt_mode_e            lt_mode,
  output logic [5:0]          lt_ch,
  output logic [3:0]          lt_hshift,
  output logic [31:0]         lt_len,
  output logic [TS_W-1:0]     ts_value,
  // status
  input  logic                aligned,
  input  logic                lt_busy,
  input  logic                lt_done,
  input  logic [15:0]         hist_drop,
  input  logic [TS_W-1:0]     timestamp,
  input  logic [15:0]         lost_cnt    [NUM_CH],
  input  logic [15:0]         reject_cnt  [NUM_CH],
  input  logic [15:0]         timeout_cnt [NUM_CH]
);
  localparam logic [31:0] ID = 32'h4741_4C49;  // "GALI"

  logic [5:0] ch_a;
  logic [2:0] reg_a;
  logic       is_ch;
  assign is_ch = addr >= 12'h100 && (32'(addr) - 32'h100) < 32'(8 * NUM_CH);
  assign ch_a  = 6'((addr - 12'h100) >> 3);
  assign reg_a = addr[2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CH; c++) begin
        cfg[c].trig_thr     <= 16'd100;
        cfg[c].trig_diff    <= 4'd4;
        cfg[c].trig_holdoff <= 16'd250;
        cfg[c].idle_period  <= 32'd0;
        cfg[c].rise_k       <= 10'd200;
        cfg[c].flat_m       <= 10'd50;
        cfg[c].pz_m         <= 16'd5000;
        cfg[c].e_shift      <= 6'd20;
        cfg[c].blr_shift    <= 4'd4;
        cfg[c].blr_window   <= 16'd600;
        cfg[c].blr_en       <= 1'b1;
        cfg[c].enable       <= 1'b1;
      end
      deskew_arm <= 1'b0; lt_arm <= 1'b0; ts_load <= 1'b0;
      sync_thr <= SAMPLE_W'(12000);
      lt_mode <= galileo_pkg::LT_OFF; lt_ch <= '0; lt_hshift <= '0; lt_len <= '0;
      ts_value <= '0;
      rdata <= '0;
    end else begin
      deskew_arm <= 1'b0; lt_arm <= 1'b0; ts_load <= 1'b0;
      if (wr) begin
        if (is_ch) begin
          case (reg_a)
            3'd0: begin
              cfg[ch_a].trig_thr  <= wdata[15:0];
              cfg[ch_a].trig_diff <= wdata[19:16];
              cfg[ch_a].blr_en    <= wdata[30];
              cfg[ch_a].enable    <= wdata[31];
            end
            3'd1: cfg[ch_a].trig_holdoff <= wdata[15:0];
            3'd2: cfg[ch_a].idle_period  <= wdata;
            3'd3: begin
              cfg[ch_a].rise_k <= wdata[9:0];
              cfg[ch_a].flat_m <= wdata[25:16];
            end
            3'd4: begin
              cfg[ch_a].pz_m    <= wdata[15:0];
              cfg[ch_a].e_shift <= wdata[21:16];
            end
            3'd5: begin
              cfg[ch_a].blr_window  <= wdata[15:0];
              cfg[ch_a].blr_shift <= wdata[19:16];
            end
            default: ;
          endcase
        end else begin
          case (addr)
            12'h001: begin
              deskew_arm <= wdata[0];
              lt_arm     <= wdata[1];
              ts_load    <= wdata[2];
            end
            12'h002: sync_thr <= wdata[SAMPLE_W-1:0];
            12'h003: begin
              lt_mode   <= lt_mode_e'(wdata[1:0]);
              lt_ch     <= wdata[13:8];
              lt_hshift <= wdata[19:16];
            end
            12'h004: lt_len <= wdata;
            12'h005: ts_value[31:0] <= wdata;
            12'h006: ts_value[TS_W-1:32] <= wdata[TS_W-33:0];
            default: ;
          endcase
        end
      end
      if (rd) begin
        rdata <= '0;
        if (is_ch) begin
          case (reg_a)
            3'd0: rdata <= {cfg[ch_a].enable, cfg[ch_a].blr_en, 10'd0,
                            cfg[ch_a].trig_diff, cfg[ch_a].trig_thr};
            3'd1: rdata <= {16'd0, cfg[ch_a].trig_holdoff};
            3'd2: rdata <= cfg[ch_a].idle_period;
            3'd3: rdata <= {6'd0, cfg[ch_a].flat_m, 6'd0, cfg[ch_a].rise_k};
            3'd4: rdata <= {10'd0, cfg[ch_a].e_shift, cfg[ch_a].pz_m};
            3'd5: rdata <= {12'd0, cfg[ch_a].blr_shift, cfg[ch_a].blr_window};
            3'd6: rdata <= {reject_cnt[ch_a], lost_cnt[ch_a]};
            default: rdata <= {16'd0, timeout_cnt[ch_a]};
          endcase
        end else begin
          case (addr)
            12'h000: rdata <= ID;
            12'h002: rdata <= 32'(sync_thr);
            12'h003: rdata <= {12'd0, lt_hshift, 2'd0, lt_ch, 6'd0, lt_mode};
            12'h004: rdata <= lt_len;
            12'h005: rdata <= ts_value[31:0];
            12'h006: rdata <= 32'(ts_value[TS_W-1:32]);
            12'h007: rdata <= {hist_drop, 13'd0, lt_done, lt_busy, aligned};
            12'h008: rdata <= timestamp[31:0];
            12'h009: rdata <= 32'(timestamp[TS_W-1:32]);
            default: rdata <= '0;
          endcase
        end
      end
    end
  end
endmodule
