// idle_trigger: fake first-level triggers for a minimum event rate.
//
// When a channel sees few real pulses, the event builder downstream would
// wait a long time for data from it. This block counts cycles since the
// last trigger of either kind; when the count reaches idle_period without a
// real trigger it emits a fake trigger. Fake triggers capture an ordinary
// trace and energy but produce events tagged as idle and are never sent to
// the GTS tree. The channel thus delivers at least one event every
// idle_period cycles. idle_period = 0 disables the mechanism.
//
// Interface: real_trig (one-cycle pulse from trigger_l1), idle_period;
// idle_trig is a one-cycle pulse. Timing: idle_trig is registered; a real
// trigger restarts the count in the same cycle.
// The paper gives the function; the counting scheme is this design's choice.
module idle_trigger (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        real_trig,
  input  logic [31:0] idle_period,
  output logic        idle_trig
);
  logic [31:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      idle_trig <= 1'b0;
    end else begin
      idle_trig <= 1'b0;
      if (real_trig || idle_period == 0) begin
        cnt <= '0;
      end else if (cnt >= idle_period - 1) begin
        cnt       <= '0;
        idle_trig <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
