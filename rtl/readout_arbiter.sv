// readout_arbiter: merges the channels' event streams toward the host.
//
// Each channel offers complete packaged events on a valid/ready stream
// with a last flag. The arbiter picks a waiting channel in round-robin
// order, then connects that channel to the output until the last word of
// its event has been accepted, so events are never interleaved. The output
// carries one 32-bit word per 100 MHz cycle, the 400 MB/s the host link
// sustains.
//
// Interface: s_valid/s_data/s_last/s_ready per channel; m_valid/m_data/
// m_last/m_ready toward the host link; m_ch names the channel being sent.
// Timing: one cycle to choose a channel, then words pass through without
// a register. The paper gives the host rate; the arbitration scheme is a
// choice here.
module readout_arbiter #(
  parameter int NUM_CH = 36
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_CH-1:0] s_valid,
  input  logic [31:0]       s_data [NUM_CH],
  input  logic [NUM_CH-1:0] s_last,
  output logic [NUM_CH-1:0] s_ready,
  output logic              m_valid,
  output logic [31:0]       m_data,
  output logic              m_last,
  input  logic              m_ready,
  output logic [5:0]        m_ch
);
  localparam int CW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;

  logic          locked, found;
  logic [CW-1:0] sel, rr, pick;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int off = 0; off < NUM_CH; off++) begin
      int unsigned idx;
      idx = (32'(rr) + 32'(off)) % 32'(NUM_CH);
      if (!found && s_valid[idx]) begin
        found = 1'b1;
        pick  = CW'(idx);
      end
    end
  end

  always_comb begin
    s_ready = '0;
    m_valid = locked && s_valid[sel];
    m_data  = s_data[sel];
    m_last  = s_last[sel];
    if (locked) s_ready[sel] = m_ready;
  end
  assign m_ch = 6'(sel);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      sel    <= '0;
      rr     <= '0;
    end else if (!locked) begin
      if (found) begin
        locked <= 1'b1;
        sel    <= pick;
        rr     <= (pick == CW'(NUM_CH - 1)) ? '0 : pick + 1'b1;
      end
    end else if (m_valid && m_ready && m_last) begin
      locked <= 1'b0;
    end
  end
endmodule
