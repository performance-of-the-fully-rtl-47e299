// trapezoid_energy: trapezoidal shaper and energy pick-off of one channel.
//
// The preamplifier delivers steps with a long exponential decay. The
// recursive trapezoidal filter turns each such pulse into a trapezoid whose
// flat top is proportional to the pulse amplitude:
//   d[n] = v[n] - v[n-k] - v[n-l] + v[n-l-k],   l = k + m
//   p[n] = p[n-1] + d[n]
//   r[n] = p[n] + M * d[n]
//   s[n] = s[n-1] + r[n]
// k is the rise time, m the flat-top length and M the pole-zero constant
// (about the decay time in samples; M = 0 suits an input without decay,
// where p itself is the trapezoid). The delays are taken from a circular
// sample buffer of DLY_DEPTH entries, so 2k + m must stay below DLY_DEPTH.
// Taps reaching before the first sample after reset read as zero.
// A trigger starts a counter; k + m/2 + PEAK_ADJ samples later the filter
// output is taken, less the baseline bl measured by the baseline restorer,
// shifted right by e_shift and saturated to 0..65535.
// A trigger arriving while a pick-off is pending is ignored (busy).
//
// Interface: din/din_valid (signed aligned samples), trig, cfg k, m, M,
// e_shift, baseline bl; energy/energy_valid; trap is the raw filter output s, exposed
// for the long-trace memory and for test. Timing: s is registered, one
// cycle after the sample; energy_valid comes k + m/2 + PEAK_ADJ + 1 cycles
// after the trigger. The paper specifies trapezoidal shaping with
// programmable parameters; the filter form follows the literature it cites,
// the pick-off point and widths are choices here.
module trapezoid_energy #(
  parameter int DATA_W    = 16,
  parameter int DLY_DEPTH = 4096,
  parameter int ACC_W     = 48,
  parameter int PEAK_ADJ  = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] din,
  input  logic                     din_valid,
  input  logic                     trig,
  input  logic [9:0]               rise_k,
  input  logic [9:0]               flat_m,
  input  logic [15:0]              pz_m,
  input  logic [5:0]               e_shift,
  input  logic signed [ACC_W-1:0]  bl,
  output logic signed [ACC_W-1:0]  trap,
  output logic [15:0]              energy,
  output logic                     energy_valid,
  output logic                     busy
);
  localparam int AW = $clog2(DLY_DEPTH);

  logic signed [DATA_W-1:0] dly [DLY_DEPTH];
  logic [AW-1:0]            wp;
  logic [AW:0]              nfill;          // samples written, saturating
  logic [AW:0]              k_e, l_e, lk_e;
  logic signed [DATA_W-1:0] vk, vl, vlk;
  logic signed [DATA_W+2:0] d;
  logic signed [ACC_W-1:0]  p, p_next, r, s_next, shifted;
  logic [11:0]              cnt;

  assign k_e  = (AW+1)'(rise_k);
  assign l_e  = (AW+1)'(rise_k) + (AW+1)'(flat_m);
  assign lk_e = l_e + k_e;

  // Delayed taps (reads of the circular buffer before this cycle's write).
  assign vk  = (nfill >= k_e)  ? dly[wp - k_e[AW-1:0]]  : '0;
  assign vl  = (nfill >= l_e)  ? dly[wp - l_e[AW-1:0]]  : '0;
  assign vlk = (nfill >= lk_e) ? dly[wp - lk_e[AW-1:0]] : '0;

  assign d      = (DATA_W+3)'(din) - (DATA_W+3)'(vk) - (DATA_W+3)'(vl) + (DATA_W+3)'(vlk);
  assign p_next = p + ACC_W'(d);
  assign r      = p_next + ACC_W'($signed({1'b0, pz_m})) * ACC_W'(d);
  assign s_next = trap + r;
  assign shifted = (trap - bl) >>> e_shift;

  always_ff @(posedge clk) begin
    if (din_valid) dly[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp           <= '0;
      nfill        <= '0;
      p            <= '0;
      trap         <= '0;
      cnt          <= '0;
      busy         <= 1'b0;
      energy       <= '0;
      energy_valid <= 1'b0;
    end else begin
      energy_valid <= 1'b0;
      if (din_valid) begin
        wp   <= wp + 1'b1;
        if (nfill != (AW+1)'(DLY_DEPTH)) nfill <= nfill + 1'b1;
        p    <= p_next;
        trap <= s_next;
      end
      if (busy) begin
        if (cnt == 0) begin
          busy         <= 1'b0;
          energy_valid <= 1'b1;
          if (shifted < 0)                 energy <= '0;
          else if (shifted > 65535)        energy <= 16'hFFFF;
          else                             energy <= shifted[15:0];
        end else if (din_valid) begin
          cnt <= cnt - 1'b1;
        end
      end else if (trig) begin
        busy <= 1'b1;
        cnt  <= 12'(rise_k) + 12'(flat_m >> 1) + 12'(PEAK_ADJ);
      end
    end
  end
endmodule
