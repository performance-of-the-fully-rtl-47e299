// spectra_trace_ram: long-trace recorder and online spectrum memory.
//
// The short traces of ordinary events hold a few hundred samples. For
// looking at a channel in detail (noise spectra, faulty channels) this
// block owns one large dual-port RAM of DEPTH 32-bit words that can be used
// in one of two ways for a selected channel:
//   - long trace: 2*DEPTH-sample records, two 16-bit samples per word,
//     of up to len words; LT_FREE starts on arm, LT_TRIGGERED starts at the
//     channel's next trigger after arm;
//   - histogram (LT_HISTO): every energy the channel computes, validated by
//     the GTS tree or not, increments bin energy >> h_shift (clipped to the
//     last bin) by a read-modify-write on port A.
// The host reads and writes the RAM through port B, for readout and for
// clearing the histogram.
//
// Interface: din/din_valid, trig and energy/energy_valid of the selected
// channel; mode, arm, len, h_shift from the registers; host port
// h_addr/h_rd/h_wr/h_wdata with h_rdata valid one cycle after h_rd.
// Timing: one sample per cycle while recording. A histogram update takes
// two cycles; an energy arriving while one is in progress is dropped and
// counted in hist_drop. The paper gives the two uses of a dedicated
// dual-port RAM and the length scale; the rest is a choice here.
module spectra_trace_ram
  import galileo_pkg::lt_mode_e, galileo_pkg::LT_OFF, galileo_pkg::LT_FREE,
         galileo_pkg::LT_TRIGGERED, galileo_pkg::LT_HISTO;
#(
  parameter int DEPTH = 131072
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  lt_mode_e                 mode,
  input  logic                     arm,
  input  logic [$clog2(DEPTH):0]   len,
  input  logic [3:0]               h_shift,
  input  logic [15:0]              din,
  input  logic                     din_valid,
  input  logic                     trig,
  input  logic [15:0]              energy,
  input  logic                     energy_valid,
  output logic                     lt_busy,
  output logic                     lt_done,
  output logic [15:0]              hist_drop,
  input  logic [$clog2(DEPTH)-1:0] h_addr,
  input  logic                     h_rd,
  input  logic                     h_wr,
  input  logic [31:0]              h_wdata,
  output logic [31:0]              h_rdata
);
  localparam int AW = $clog2(DEPTH);

  logic [31:0]   mem [DEPTH];
  logic [AW-1:0] a_addr, wr_ptr, bin;
  logic          a_we;
  logic [31:0]   a_wdata, a_q;

  typedef enum logic [1:0] {S_IDLE, S_WAIT_TRIG, S_REC} lt_state_e;
  lt_state_e     st;
  logic          odd;
  logic [15:0]   lo;
  logic [AW:0]   nwords;
  logic          h_stage;         // histogram RMW: read done, write back now
  logic [AW-1:0] h_bin;
  logic [15:0]   e_sh;

  assign e_sh = energy >> h_shift;
  assign bin  = (32'(e_sh) >= DEPTH) ? AW'(DEPTH - 1) : AW'(e_sh);

  // Port A control
  always_comb begin
    a_we    = 1'b0;
    a_addr  = h_bin;
    a_wdata = a_q + 1'b1;
    if (mode == LT_HISTO) begin
      a_we   = h_stage;
      a_addr = h_stage ? h_bin : bin;
    end else if (st == S_REC && din_valid && odd) begin
      a_we    = 1'b1;
      a_addr  = wr_ptr;
      a_wdata = {din, lo};
    end
  end

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    a_q <= mem[a_addr];
    if (h_wr) mem[h_addr] <= h_wdata;
    if (h_rd) h_rdata <= mem[h_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; odd <= 1'b0; lo <= '0; wr_ptr <= '0; nwords <= '0;
      lt_done <= 1'b0; h_stage <= 1'b0; h_bin <= '0; hist_drop <= '0;
    end else begin
      // long trace
      if (arm && (mode == LT_FREE || mode == LT_TRIGGERED)) begin
        st      <= (mode == LT_FREE) ? S_REC : S_WAIT_TRIG;
        odd     <= 1'b0;
        wr_ptr  <= '0;
        nwords  <= '0;
        lt_done <= 1'b0;
      end else begin
        case (st)
          S_WAIT_TRIG: if (trig) st <= S_REC;
          S_REC: if (din_valid) begin
            odd <= !odd;
            if (!odd) lo <= din;
            else begin
              wr_ptr <= wr_ptr + 1'b1;
              nwords <= nwords + 1'b1;
              if (nwords + 1'b1 >= len || nwords + 1'b1 == (AW+1)'(DEPTH)) begin
                st      <= S_IDLE;
                lt_done <= 1'b1;
              end
            end
          end
          default: ;
        endcase
        if (mode == LT_OFF || mode == LT_HISTO) st <= S_IDLE;
      end
      // histogram read-modify-write
      h_stage <= 1'b0;
      if (mode == LT_HISTO && energy_valid) begin
        if (h_stage) hist_drop <= hist_drop + 1'b1;
        else begin
          h_stage <= 1'b1;
          h_bin   <= bin;
        end
      end
    end
  end

  assign lt_busy = (st != S_IDLE);
endmodule
