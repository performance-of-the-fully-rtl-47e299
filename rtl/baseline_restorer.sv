// baseline_restorer: auto-triggered baseline restorer of the energy filter.
//
// Between pulses the trapezoid filter output should sit at zero, but at
// high counting rates it wanders: residual pole-zero mismatch, long
// preamplifier tails and low-frequency noise leave an offset that would add
// to every energy. This block measures that offset and hands it to the
// energy pick-off, which subtracts it from the flat-top value.
// The measurement is an exponential average of the filter output,
// b += (s - b) * 2^-blr_shift, taken only while the channel is quiet. It is
// "auto-triggered": every trigger of the channel (taken or not) freezes
// the average for blr_window samples, which should cover the whole
// trapezoid (2k + m) plus margin. To keep the leading edge of a pulse out
// of the average, the filter output is delayed by DLY samples before it is
// averaged, so the freeze starts before the pulse reaches the averager.
//
// Interface: din/din_valid is the filter output s; pulse is the channel's
// trigger; baseline is the current estimate (zero while blr_en is low).
// Timing: baseline is registered and follows the delayed filter output;
// one sample per cycle. The paper names an auto-triggered baseline restorer
// inside the energy module; the averaging, window and delay are choices
// here.
module baseline_restorer #(
  parameter int ACC_W = 48,
  parameter int DLY   = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ACC_W-1:0] din,
  input  logic                    din_valid,
  input  logic                    pulse,
  input  logic                    blr_en,
  input  logic [3:0]              blr_shift,
  input  logic [15:0]             blr_window,
  output logic signed [ACC_W-1:0] baseline
);
  logic signed [ACC_W-1:0] dly [DLY];
  logic signed [ACC_W-1:0] avg, diff;
  logic [15:0]             quiet_cnt;
  logic [$clog2(DLY+1)-1:0] nfill;

  assign diff     = dly[DLY-1] - avg;
  assign baseline = blr_en ? avg : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DLY; i++) dly[i] <= '0;
      avg       <= '0;
      quiet_cnt <= '0;
      nfill     <= '0;
    end else begin
      if (pulse) quiet_cnt <= blr_window;
      if (din_valid) begin
        dly[0] <= din;
        for (int i = 1; i < DLY; i++) dly[i] <= dly[i-1];
        if (nfill != ($clog2(DLY+1))'(DLY)) nfill <= nfill + 1'b1;
        if (!pulse && quiet_cnt != 0) quiet_cnt <= quiet_cnt - 1'b1;
        if (!pulse && quiet_cnt == 0 && nfill == ($clog2(DLY+1))'(DLY))
          avg <= avg + (diff >>> blr_shift);
      end
    end
  end
endmodule
