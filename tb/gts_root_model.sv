// gts_root_model: behavioural stand-in for the GTS tree seen from one leaf
// (testbench only, not synthesizable). It takes trigger requests with
// random stalls on ready and answers each after a random delay of
// MIN_DLY..MAX_DLY cycles. The answer depends on the requesting channel:
// channels in reject_mask are rejected, channels in silent_mask never get
// an answer (so the leaf's time-out must free their slots), all others are
// accepted. Counts of each kind are kept for the testbench.
module gts_root_model
  import galileo_pkg::gts_tag_t, galileo_pkg::gts_reply_t;
#(
  parameter int MIN_DLY = 20,
  parameter int MAX_DLY = 1500
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [63:0] reject_mask,
  input  logic [63:0] silent_mask,
  input  logic       req_valid,
  input  gts_tag_t   req_tag,
  output logic       req_ready,
  output logic       rep_valid,
  output gts_reply_t rep
);
  int n_req = 0, n_acc = 0, n_rej = 0, n_silent = 0;

  typedef struct { int due; gts_reply_t r; } pend_t;
  pend_t pend [$];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      req_ready <= 1'b0;
      rep_valid <= 1'b0;
    end else begin
      req_ready <= ($urandom_range(0, 4) != 0);
      if (req_valid && req_ready) begin
        pend_t p;
        n_req++;
        p.r.tag = req_tag;
        p.r.accept = !reject_mask[req_tag.ch];
        p.due = cyc + int'($urandom_range(MIN_DLY, MAX_DLY));
        if (silent_mask[req_tag.ch]) n_silent++;
        else begin
          if (p.r.accept) n_acc++; else n_rej++;
          pend.push_back(p);
        end
      end
      rep_valid <= 1'b0;
      for (int i = 0; i < pend.size(); i++) begin
        if (pend[i].due <= cyc) begin
          rep_valid <= 1'b1;
          rep       <= pend[i].r;
          pend.delete(i);
          break;
        end
      end
    end
  end
endmodule
