// gts_leaf: GTS leaf services of the preprocessing board.
//
// The global trigger and synchronization (GTS) tree gives every board a
// phase-aligned 100 MHz clock and a common time, and decides which local
// triggers become events. This leaf keeps the global timestamp (a counter
// on the GTS clock that the tree can load), collects the trigger requests
// of the NUM_CH channels, sends them one at a time to the tree with a
// round-robin choice among waiting channels, and hands each validation
// reply back to the channel it names.
//
// Interface: ch_req/ch_req_slot per channel, held until ch_req_ack (one
// cycle). Toward the tree a valid/ready request carrying {channel, slot};
// from the tree a reply {channel, slot, accept} with a valid strobe.
// rep_valid is decoded per channel; rep_slot/rep_accept are shared.
// Timing: at most one request per cycle; the reply reaches the channel one
// cycle after it arrives. The services themselves are from the paper; the
// tree's link protocol is defined elsewhere, so plain words stand in for it.
module gts_leaf
  import galileo_pkg::TS_W, galileo_pkg::gts_tag_t, galileo_pkg::gts_reply_t;
#(
  parameter int NUM_CH = galileo_pkg::NUM_CH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // timestamp
  input  logic                   ts_load,
  input  logic [TS_W-1:0]        ts_value,
  output logic [TS_W-1:0]        timestamp,
  // channel side
  input  logic [NUM_CH-1:0]      ch_req,
  input  logic [1:0]             ch_req_slot [NUM_CH],
  output logic [NUM_CH-1:0]      ch_req_ack,
  output logic [NUM_CH-1:0]      rep_valid,
  output logic [1:0]             rep_slot,
  output logic                   rep_accept,
  // tree side
  output logic                   gts_req_valid,
  output gts_tag_t               gts_req_tag,
  input  logic                   gts_req_ready,
  input  logic                   gts_rep_valid,
  input  gts_reply_t             gts_rep
);
  localparam int CW = $clog2(NUM_CH);

  logic [CW-1:0] rr, pick;
  logic          found;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int off = 0; off < NUM_CH; off++) begin
      int unsigned idx;
      idx = (32'(rr) + 32'(off)) % 32'(NUM_CH);
      if (!found && ch_req[idx] && !ch_req_ack[idx]) begin
        found = 1'b1;
        pick  = CW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timestamp     <= '0;
      rr            <= '0;
      ch_req_ack    <= '0;
      gts_req_valid <= 1'b0;
      gts_req_tag   <= '0;
      rep_valid     <= '0;
      rep_slot      <= '0;
      rep_accept    <= 1'b0;
    end else begin
      timestamp  <= ts_load ? ts_value : timestamp + 1'b1;
      ch_req_ack <= '0;
      if (gts_req_valid && gts_req_ready) gts_req_valid <= 1'b0;
      if ((!gts_req_valid || gts_req_ready) && found) begin
        gts_req_valid   <= 1'b1;
        gts_req_tag.ch  <= 6'(pick);
        gts_req_tag.slot <= ch_req_slot[pick];
        ch_req_ack[pick] <= 1'b1;
        rr <= (pick == CW'(NUM_CH - 1)) ? '0 : pick + 1'b1;
      end
      rep_valid <= '0;
      if (gts_rep_valid && int'(gts_rep.tag.ch) < NUM_CH) begin
        rep_valid[gts_rep.tag.ch] <= 1'b1;
        rep_slot   <= gts_rep.tag.slot;
        rep_accept <= gts_rep.accept;
      end
    end
  end
endmodule
