// deskew_fifo: per-channel latency compensation FIFO.
//
// The serial links of different channels arrive with different latencies.
// To line them up, a synchronization pulse is injected at the same instant
// at every ADC input. Each channel writes its decoded samples into this FIFO;
// when alignment is armed the FIFO is emptied and stops writing until it
// sees the sync marker (first sample at or above sync_thr), which becomes
// the first entry. A common release, raised once every channel has seen its
// marker, starts reading all FIFOs in the same cycle, so the marker samples
// (and everything after them) leave every channel together. Channels whose
// link is faster keep more entries in their FIFO.
//
// Interface: din/din_valid from the link decoder; arm is a one-cycle pulse
// from the host; release_i comes from the AND of all channels' sync_seen.
// Timing: one sample per cycle; a read appears on dout one cycle after
// release_i is seen with the FIFO non-empty. After reset the FIFO writes
// without waiting for a marker (unaligned pass-through).
// The paper gives the purpose (FIFO after link decoding, sync pulse at the
// ADC input); marker detection by threshold and the depth are choices here.
module deskew_fifo #(
  parameter int SAMPLE_W = 14,
  parameter int DEPTH    = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [SAMPLE_W-1:0] din,
  input  logic                din_valid,
  input  logic                arm,
  input  logic [SAMPLE_W-1:0] sync_thr,
  input  logic                release_i,
  output logic                sync_seen,
  output logic [SAMPLE_W-1:0] dout,
  output logic                dout_valid,
  output logic                overflow
);
  localparam int AW = $clog2(DEPTH);

  logic [SAMPLE_W-1:0] mem [DEPTH];
  logic [AW:0]         wr_ptr, rd_ptr;
  logic                empty, full, wr_en, rd_en;

  assign empty = (wr_ptr == rd_ptr);
  assign full  = (wr_ptr[AW] != rd_ptr[AW]) && (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]);
  assign wr_en = din_valid && !arm && (sync_seen || din >= sync_thr) && !full;
  assign rd_en = release_i && !empty && !arm;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      sync_seen  <= 1'b1;
      dout       <= '0;
      dout_valid <= 1'b0;
      overflow   <= 1'b0;
    end else if (arm) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      sync_seen  <= 1'b0;
      dout_valid <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      if (wr_en) begin
        wr_ptr    <= wr_ptr + 1'b1;
        sync_seen <= 1'b1;
      end
      if (din_valid && sync_seen && full) overflow <= 1'b1;
      dout_valid <= rd_en;
      if (rd_en) begin
        dout   <= mem[rd_ptr[AW-1:0]];
        rd_ptr <= rd_ptr + 1'b1;
      end
    end
  end
endmodule
