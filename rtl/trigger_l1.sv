// trigger_l1: first-level trigger of one channel.
//
// A fast filter estimates the amplitude of the leading edge of a pulse,
// f[n] = x[n] - x[n-D], with D programmable from 1 to MAX_DIFF-1. The
// trigger fires, for one cycle, when f rises to or above the programmable
// threshold while armed. It then disarms; it re-arms once f has dropped
// below the threshold again and the programmable hold-off has elapsed.
//
// Interface: din/din_valid (signed, baseline restored), cfg fields thr,
// diff and holdoff; trig is the one-cycle trigger pulse. Timing: trig is
// registered, asserted in the cycle after the sample that crossed.
// The paper states only that the trigger fires when the pulse energy exceeds
// a programmable threshold; the differentiator and hold-off are choices here.
module trigger_l1 #(
  parameter int DATA_W   = 16,
  parameter int MAX_DIFF = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] din,
  input  logic                     din_valid,
  input  logic [15:0]              thr,
  input  logic [3:0]               diff,
  input  logic [15:0]              holdoff,
  output logic                     trig
);
  logic signed [DATA_W-1:0] dly [MAX_DIFF];
  logic signed [DATA_W:0]   f;
  logic [3:0]               d_sel;
  logic                     armed, above;
  logic [15:0]              hold_cnt;

  assign d_sel = (diff == 0) ? 4'd1 : diff;
  assign f     = (DATA_W+1)'(din) - (DATA_W+1)'(dly[d_sel - 1'b1]);
  assign above = f >= $signed({1'b0, thr});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_DIFF; i++) dly[i] <= '0;
      armed    <= 1'b0;
      hold_cnt <= '0;
      trig     <= 1'b0;
    end else begin
      trig <= 1'b0;
      if (din_valid) begin
        dly[0] <= din;
        for (int i = 1; i < MAX_DIFF; i++) dly[i] <= dly[i-1];
        if (hold_cnt != 0) hold_cnt <= hold_cnt - 1'b1;
        if (armed && above) begin
          trig     <= 1'b1;
          armed    <= 1'b0;
          hold_cnt <= holdoff;
        end else if (!armed && !above && hold_cnt == 0) begin
          armed <= 1'b1;
        end
      end
    end
  end
endmodule
