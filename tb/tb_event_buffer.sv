// tb_event_buffer: one channel's event memory with short parameters
// (20-sample traces, 4 before the trigger, 4 slots, 300-cycle time-out).
// The sample input is a ramp, so every trace can be predicted from the
// sample at the trigger. Real and idle triggers arrive at random; a GTS
// model answers real triggers by event number: accept, reject, or no reply
// (time-out). An energy follows each taken trigger after 10 cycles.
// Checks: exactly the accepted and the idle events come out, each once,
// with the right header (idle tag, channel, number, timestamp, energy) and
// trace; idle events never raise a GTS request; reject, time-out and lost
// triggers are counted; with the sink always ready an event's words leave
// on consecutive cycles.
module tb_event_buffer;
  import galileo_pkg::*;
  localparam int TL = 20, PRE = 4, NS = 4, TO = 300, TW = TL / 2, TOTAL = 3 + TW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0] din = 0;
  logic trig = 0, idle_trig = 0, trig_taken;
  logic [15:0] energy = 0;
  logic energy_valid = 0;
  logic [47:0] timestamp = 0;
  logic gts_req, gts_req_ack = 0, rep_valid = 0, rep_accept = 0;
  logic [1:0] gts_req_slot, rep_slot = 0;
  logic out_valid, out_last, out_ready = 0;
  logic [31:0] out_data;
  logic [15:0] lost_cnt, timeout_cnt, reject_cnt;

  event_buffer #(.TRACE_LEN(TL), .PRE_TRIG(PRE), .NSLOTS(NS), .TIMEOUT(TO)) dut (
    .clk, .rst_n, .ch_id(6'd9), .din, .din_valid(1'b1), .trig, .idle_trig, .trig_taken,
    .energy, .energy_valid, .timestamp, .gts_req, .gts_req_slot, .gts_req_ack,
    .rep_valid, .rep_slot, .rep_accept, .out_valid, .out_data, .out_last, .out_ready,
    .lost_cnt, .timeout_cnt, .reject_cnt);

  // expected event records, by event number
  typedef struct { bit idle; int v; longint ts; int e; bit expect_out; bit seen; } ev_t;
  ev_t evs [int];
  int n_taken = 0, n_lost = 0, n_rej = 0, n_to = 0, n_out = 0, cyc = 0;
  bit always_ready = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    din <= din + 16'sd1;
    timestamp <= timestamp + 1;
  end

  // observe taken triggers; schedule energy; classify by number
  always @(posedge clk) if (rst_n) begin
    if ((trig || idle_trig) && !trig_taken) n_lost++;
    if (trig_taken) begin
      ev_t e;
      e.idle = !trig; e.v = int'(din); e.ts = longint'(timestamp); e.e = (n_taken * 7 + 3) & 16'hFFFF;
      e.expect_out = e.idle || (n_taken % 3 == 0); e.seen = 0;
      if (!e.idle && n_taken % 3 == 1) n_rej++;
      if (!e.idle && n_taken % 3 == 2) n_to++;
      evs[n_taken] = e;
      fork
        automatic int en = e.e;
        begin
          repeat (10) @(negedge clk);
          energy = 16'(en); energy_valid = 1;
          @(negedge clk) energy_valid = 0;
        end
      join_none
      n_taken++;
    end
  end

  // GTS model: take requests, answer by event number
  int slot_ev [4];
  always @(posedge clk) if (rst_n) begin
    gts_req_ack <= 1'b0;
    if (trig_taken) slot_ev[dut.free_slot] = n_taken - 1;
    if (gts_req && !gts_req_ack) begin
      int num; logic [1:0] s;
      gts_req_ack <= 1'b1;
      s = gts_req_slot;
      num = slot_ev[s];
      checks++;
      if (evs[num].idle) begin failures++; $display("idle event %0d sent to GTS", num); end
      if (num % 3 != 2)
        fork
          automatic logic [1:0] ss = s;
          automatic int nn = num;
          begin
            repeat ($urandom_range(5, 150)) @(negedge clk);
            rep_valid = 1; rep_slot = ss; rep_accept = (nn % 3 == 0);
            @(negedge clk) rep_valid = 0;
          end
        join_none
    end
  end

  // sink
  int widx = 0, cur_num = -1, start_cyc = 0;
  logic [31:0] w0, w1, w2;
  always @(posedge clk) begin
    out_ready <= always_ready ? 1'b1 : ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      if (widx == 0) begin w0 = out_data; start_cyc = cyc; cur_num = int'(out_data[15:0]); end
      else if (widx == 1) w1 = out_data;
      else if (widx == 2) begin
        w2 = out_data;
        checks++;
        if (!evs.exists(cur_num) || !evs[cur_num].expect_out || evs[cur_num].seen) begin
          failures++; $display("unexpected event %0d", cur_num);
        end else begin
          ev_t e;
          e = evs[cur_num];
          if (w0[31:28] != 4'hE || w0[27] != e.idle || w0[21:16] != 6'd9 ||
              {w1, w2[31:16]} != 48'(e.ts) || int'(w2[15:0]) != e.e) begin
            failures++; $display("bad header of event %0d: %h %h %h", cur_num, w0, w1, w2);
          end
        end
      end else begin
        int first;
        first = evs.exists(cur_num) ? evs[cur_num].v + 1 - PRE : 0;
        checks++;
        if (out_data !== {16'(first + 2*(widx-3) + 1), 16'(first + 2*(widx-3))}) begin
          failures++; if (failures < 8) $display("event %0d word %0d = %h", cur_num, widx, out_data);
        end
      end
      if (out_last) begin
        checks++;
        if (widx != TOTAL - 1) failures++;
        if (always_ready) begin
          checks++;
          if (cyc - start_cyc != TOTAL - 1) begin failures++; $display("event took %0d cycles", cyc - start_cyc + 1); end
        end
        if (evs.exists(cur_num)) evs[cur_num].seen = 1;
        n_out++;
        widx = 0;
      end else widx++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 120; i++) begin
      repeat ($urandom_range(2, 40)) @(negedge clk);
      if ($urandom_range(0, 4) == 0) idle_trig = 1; else trig = 1;
      @(negedge clk) begin trig = 0; idle_trig = 0; end
    end
    repeat (TO + 200) @(negedge clk);
    // a final accepted/idle burst with the sink always ready
    always_ready = 1;
    repeat (5) begin
      repeat (60) @(negedge clk);
      idle_trig = 1;
      @(negedge clk) idle_trig = 0;
    end
    repeat (TO + 200) @(negedge clk);
    foreach (evs[k]) begin
      checks++;
      if (evs[k].expect_out != evs[k].seen) begin failures++; $display("event %0d expected %0d seen %0d", k, evs[k].expect_out, evs[k].seen); end
    end
    checks++; if (int'(lost_cnt) != n_lost || n_lost == 0) begin failures++; $display("lost %0d / %0d", lost_cnt, n_lost); end
    checks++; if (int'(reject_cnt) != n_rej || n_rej == 0) begin failures++; $display("rej %0d / %0d", reject_cnt, n_rej); end
    checks++; if (int'(timeout_cnt) != n_to || n_to == 0) begin failures++; $display("to %0d / %0d", timeout_cnt, n_to); end
    $display("taken %0d out %0d lost %0d rejected %0d timed out %0d", n_taken, n_out, n_lost, n_rej, n_to);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
