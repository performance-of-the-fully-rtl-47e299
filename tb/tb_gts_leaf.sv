// tb_gts_leaf: 8 channels raise trigger requests at random times, each held
// until acknowledged. The tree side accepts requests with random stalls and
// sends replies. Checks: every request reaches the tree exactly once with
// its channel and slot; when all channels wait, service is round-robin (no
// channel served twice before another waiting one); replies arrive at the
// channel they name one cycle later; the timestamp counts and loads.
module tb_gts_leaf;
  import galileo_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ts_load = 0;
  logic [TS_W-1:0] ts_value = 0, timestamp;
  logic [N-1:0] ch_req = 0, ch_req_ack, rep_valid;
  logic [1:0] ch_req_slot [N];
  logic [1:0] rep_slot;
  logic rep_accept;
  logic gts_req_valid, gts_req_ready = 0, gts_rep_valid = 0;
  gts_tag_t gts_req_tag;
  gts_reply_t gts_rep;

  gts_leaf #(.NUM_CH(N)) dut (.*);

  int sent [N], recvd [N];

  // channel models: request, hold until ack
  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (ch_req_ack[c]) begin
        ch_req[c] <= 1'b0;
      end else if (!ch_req[c] && rst_n && $urandom_range(0, 9) == 0 && sent[c] < 20) begin
        ch_req[c] <= 1'b1;
        ch_req_slot[c] <= 2'($urandom);
        sent[c] <= sent[c] + 1;
      end
    end
  end

  // tree model: random ready; check tags
  always @(posedge clk) begin
    gts_req_ready <= ($urandom_range(0, 3) != 0);
    if (gts_req_valid && gts_req_ready) begin
      checks++;
      if (int'(gts_req_tag.ch) >= N) failures++;
      else recvd[gts_req_tag.ch] <= recvd[gts_req_tag.ch] + 1;
    end
  end

  // round-robin check with all channels waiting
  task automatic rr_test();
    int order [$];
    @(negedge clk);
    ch_req = '1;
    for (int c = 0; c < N; c++) ch_req_slot[c] = 2'(c);
    while (order.size() < N) begin
      @(posedge clk); #1;
      for (int c = 0; c < N; c++) if (ch_req_ack[c]) begin
        order.push_back(c);
        checks++;
        if (gts_req_tag.ch != 6'(c) || gts_req_tag.slot != 2'(c)) failures++;
      end
    end
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) begin
      checks++;
      if (order[i] == order[j]) begin failures++; $display("channel %0d served twice", order[i]); end
    end
  endtask

  initial begin
    for (int c = 0; c < N; c++) begin sent[c] = 0; recvd[c] = 0; ch_req_slot[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    repeat (50) @(posedge clk);
    for (int c = 0; c < N; c++) begin
      checks++;
      if (sent[c] != recvd[c]) begin failures++; $display("ch %0d sent %0d got %0d", c, sent[c], recvd[c]); end
    end
    // replies
    for (int i = 0; i < 20; i++) begin
      int c; logic a; logic [1:0] s;
      c = $urandom_range(0, N-1); a = 1'($urandom); s = 2'($urandom);
      @(negedge clk);
      gts_rep_valid = 1; gts_rep.tag.ch = 6'(c); gts_rep.tag.slot = s; gts_rep.accept = a;
      @(negedge clk);
      gts_rep_valid = 0;
      checks++;
      if (rep_valid != N'(1 << c) || rep_slot != s || rep_accept != a) failures++;
    end
    // timestamp
    begin
      logic [TS_W-1:0] t0;
      t0 = timestamp;
      repeat (10) @(posedge clk); #1;
      checks++; if (timestamp - t0 != 10) failures++;
      @(negedge clk) begin ts_load = 1; ts_value = 48'h1234_5678_9ABC; end
      @(negedge clk) ts_load = 0;
      checks++; if (timestamp != 48'h1234_5678_9ABC) begin failures++; $display("ts %h", timestamp); end
    end
    // wait for the random traffic to stop, then round-robin
    wait (ch_req == 0);
    repeat (5) @(posedge clk);
    for (int c = 0; c < N; c++) sent[c] = 100;
    gts_req_ready = 1;
    rr_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
