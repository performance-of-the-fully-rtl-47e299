// event_buffer: short-trace capture and event memory of one channel.
//
// A trigger (real or idle) opens a capture window of TRACE_LEN samples that
// starts PRE_TRIG samples before the trigger, taken from a pre-trigger ring
// of PRE_TRIG samples. The window is written, two 16-bit samples per 32-bit
// word, into one of NSLOTS slots of the trace RAM; the energy computed by
// the trapezoid filter and the GTS timestamp of the trigger are kept with
// the slot. A real trigger also raises a request to the GTS tree naming the
// slot. The slot then waits for validation:
//   - accept: the event is packaged and streamed out, then the slot is freed;
//   - reject: the slot is freed without readout;
//   - no reply within TIMEOUT cycles of the trigger: the slot is freed.
// Idle (fake) triggers make events tagged as idle that skip validation.
// A trigger is taken only when no capture, energy or GTS request of this
// channel is outstanding and a slot is free; otherwise it is counted as
// lost. trig_taken tells the trapezoid filter which triggers to measure.
//
// Event format (32-bit words, out_last on the final word):
//   w0 = {4'hE, idle, 3'b0, 2'b0, channel[5:0], event number[15:0]}
//   w1 = timestamp[47:16]
//   w2 = {timestamp[15:0], energy[15:0]}
//   w3.. = {sample[2i+1], sample[2i]} for i = 0 .. TRACE_LEN/2-1
//
// Interface: samples and triggers from the channel; gts_req/gts_req_slot
// held until gts_req_ack; rep_valid/rep_slot/rep_accept is the GTS reply for
// this channel; out_* is a valid/ready stream. Timing: capture follows the
// sample stream; readout sends one word per cycle while out_ready is high,
// with two idle cycles between events. The paper gives the behaviour
// (RAM waiting for validation, accept/reject/time-out, tagged idle events,
// traces of a few hundred samples, 20 us window); slot count, the word
// format and the lost-trigger policy are choices here.
module event_buffer
  import galileo_pkg::*;
#(
  parameter int TRACE_LEN   = 200,
  parameter int PRE_TRIG    = 40,
  parameter int NSLOTS      = 4,
  parameter int TIMEOUT     = galileo_pkg::TIMEOUT_CYC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [5:0]               ch_id,
  input  logic signed [DATA_W-1:0] din,
  input  logic                     din_valid,
  input  logic                     trig,
  input  logic                     idle_trig,
  output logic                     trig_taken,
  input  logic [ENERGY_W-1:0]      energy,
  input  logic                     energy_valid,
  input  logic [TS_W-1:0]          timestamp,
  // GTS request / reply
  output logic                     gts_req,
  output logic [1:0]               gts_req_slot,
  input  logic                     gts_req_ack,
  input  logic                     rep_valid,
  input  logic [1:0]               rep_slot,
  input  logic                     rep_accept,
  // packaged event stream
  output logic                     out_valid,
  output logic [31:0]              out_data,
  output logic                     out_last,
  input  logic                     out_ready,
  // statistics
  output logic [15:0]              lost_cnt,
  output logic [15:0]              timeout_cnt,
  output logic [15:0]              reject_cnt
);
  localparam int TW    = TRACE_LEN / 2;
  localparam int TOTAL = HDR_WORDS + TW;
  localparam int SW    = (NSLOTS > 1) ? $clog2(NSLOTS) : 1;
  localparam int MW    = $clog2(NSLOTS * TW);
  localparam int IW    = $clog2(TOTAL);
  localparam int TCW   = $clog2(TIMEOUT + 1);

  // ---------------- pre-trigger ring ----------------
  logic signed [DATA_W-1:0] ring [PRE_TRIG];
  logic [$clog2(PRE_TRIG)-1:0] rp;
  logic signed [DATA_W-1:0] delayed;
  assign delayed = ring[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PRE_TRIG; i++) ring[i] <= '0;
      rp <= '0;
    end else if (din_valid) begin
      ring[rp] <= din;
      rp <= (rp == ($clog2(PRE_TRIG))'(PRE_TRIG - 1)) ? '0 : rp + 1'b1;
    end
  end

  // ---------------- slot bookkeeping ----------------
  logic [31:0]         tmem [NSLOTS * TW];
  logic [NSLOTS-1:0]   used, filled, accepted, rejected, is_idle;
  logic [TCW-1:0]      age [NSLOTS];
  logic [TS_W-1:0]     s_ts [NSLOTS];
  logic [ENERGY_W-1:0] s_en [NSLOTS];
  logic [15:0]         s_num [NSLOTS];
  logic [15:0]         evnum;

  logic          capturing, need_energy, trace_done;
  logic [SW-1:0] cap_slot, free_slot;
  logic          have_free;
  logic [$clog2(TRACE_LEN+1)-1:0] cap_idx;
  logic [DATA_W-1:0] half;
  logic          any_trig;

  always_comb begin
    have_free = 1'b0;
    free_slot = '0;
    for (int i = NSLOTS - 1; i >= 0; i--) begin
      if (!used[i]) begin
        have_free = 1'b1;
        free_slot = SW'(i);
      end
    end
  end

  assign any_trig   = trig || idle_trig;
  assign trig_taken = any_trig && have_free && !capturing && !need_energy && !trace_done && !gts_req;

  // ---------------- readout ----------------
  logic          reading, s1_valid, out_v;
  logic [IW-1:0] s1_idx, o_idx;
  logic [SW-1:0] rd_slot, ready_slot;
  logic          have_ready, en, fire_last;
  logic [31:0]   q;

  always_comb begin
    have_ready = 1'b0;
    ready_slot = '0;
    for (int i = NSLOTS - 1; i >= 0; i--) begin
      if (used[i] && filled[i] && (accepted[i] || is_idle[i])) begin
        have_ready = 1'b1;
        ready_slot = SW'(i);
      end
    end
  end

  assign en        = !out_v || out_ready;
  assign out_valid = out_v;
  assign out_last  = out_v && (o_idx == IW'(TOTAL - 1));
  assign fire_last = out_last && out_ready;

  always_comb begin
    case (o_idx)
      IW'(0):  out_data = {EVT_MAGIC, is_idle[rd_slot], 3'b0, 2'b0, ch_id, s_num[rd_slot]};
      IW'(1):  out_data = s_ts[rd_slot][TS_W-1 -: 32];
      IW'(2):  out_data = {s_ts[rd_slot][15:0], s_en[rd_slot]};
      default: out_data = q;
    endcase
  end

  always_ff @(posedge clk) begin
    if (capturing && din_valid && cap_idx[0])
      tmem[MW'(cap_slot) * MW'(TW) + MW'(cap_idx >> 1)] <= {delayed, half};
    if (en && s1_valid && s1_idx >= IW'(HDR_WORDS))
      q <= tmem[MW'(rd_slot) * MW'(TW) + MW'(s1_idx - IW'(HDR_WORDS))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0; filled <= '0; accepted <= '0; rejected <= '0; is_idle <= '0;
      for (int i = 0; i < NSLOTS; i++) begin
        age[i] <= '0; s_ts[i] <= '0; s_en[i] <= '0; s_num[i] <= '0;
      end
      evnum <= '0;
      capturing <= 1'b0; need_energy <= 1'b0; trace_done <= 1'b0;
      cap_slot <= '0; cap_idx <= '0; half <= '0;
      gts_req <= 1'b0; gts_req_slot <= '0;
      reading <= 1'b0; s1_valid <= 1'b0; s1_idx <= '0; out_v <= 1'b0; o_idx <= '0;
      rd_slot <= '0;
      lost_cnt <= '0; timeout_cnt <= '0; reject_cnt <= '0;
    end else begin
      // slot ages and time-out / reject release
      for (int i = 0; i < NSLOTS; i++) begin
        if (used[i] && age[i] != TCW'(TIMEOUT)) age[i] <= age[i] + 1'b1;
        if (used[i] && filled[i] && !is_idle[i] && !accepted[i]) begin
          if (rejected[i]) begin
            used[i] <= 1'b0;
          end else if (age[i] == TCW'(TIMEOUT)) begin
            used[i] <= 1'b0;
            timeout_cnt <= timeout_cnt + 1'b1;
          end
        end
      end

      // GTS reply
      if (rep_valid && used[rep_slot] && !is_idle[rep_slot] && !accepted[rep_slot]
          && !rejected[rep_slot] && age[rep_slot] != TCW'(TIMEOUT)) begin
        if (rep_accept) accepted[rep_slot] <= 1'b1;
        else begin
          rejected[rep_slot] <= 1'b1;
          reject_cnt <= reject_cnt + 1'b1;
        end
      end
      if (gts_req_ack) gts_req <= 1'b0;

      // trigger acceptance
      if (any_trig && !trig_taken) lost_cnt <= lost_cnt + 1'b1;
      if (trig_taken) begin
        used[free_slot]     <= 1'b1;
        filled[free_slot]   <= 1'b0;
        accepted[free_slot] <= 1'b0;
        rejected[free_slot] <= 1'b0;
        is_idle[free_slot]  <= !trig;
        age[free_slot]      <= '0;
        s_ts[free_slot]     <= timestamp;
        s_num[free_slot]    <= evnum;
        evnum               <= evnum + 1'b1;
        cap_slot            <= free_slot;
        capturing           <= 1'b1;
        need_energy         <= 1'b1;
        trace_done          <= 1'b0;
        cap_idx             <= '0;
        if (trig) begin
          gts_req      <= 1'b1;
          gts_req_slot <= 2'(free_slot);
        end
      end

      // trace capture
      if (capturing && din_valid) begin
        if (!cap_idx[0]) half <= delayed;
        if (cap_idx == ($clog2(TRACE_LEN+1))'(TRACE_LEN - 1)) begin
          capturing  <= 1'b0;
          trace_done <= 1'b1;
        end else begin
          cap_idx <= cap_idx + 1'b1;
        end
      end
      if (energy_valid && need_energy) begin
        s_en[cap_slot] <= energy;
        need_energy    <= 1'b0;
      end
      if (trace_done && !need_energy) begin
        filled[cap_slot] <= 1'b1;
        trace_done       <= 1'b0;
      end

      // readout
      if (!reading && have_ready) begin
        reading  <= 1'b1;
        rd_slot  <= ready_slot;
        s1_valid <= 1'b1;
        s1_idx   <= '0;
      end else if (en) begin
        out_v <= s1_valid;
        o_idx <= s1_idx;
        if (s1_valid) begin
          if (s1_idx == IW'(TOTAL - 1)) s1_valid <= 1'b0;
          else                          s1_idx   <= s1_idx + 1'b1;
        end
      end
      if (fire_last) begin
        reading        <= 1'b0;
        used[rd_slot]  <= 1'b0;
        out_v          <= 1'b0;
      end
    end
  end

  initial begin
    assert (NSLOTS <= 4) else $error("slot tag is 2 bits");
    assert (TRACE_LEN % 2 == 0) else $error("TRACE_LEN must be even");
  end
endmodule
