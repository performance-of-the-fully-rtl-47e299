// tb_deskew_fifo: three deskew FIFOs fed with the same sample sequence at
// different link latencies (0, 3 and 7 cycles). After arming, each FIFO must
// start at its own sync marker and, once all are released together, every
// output must carry the same sample in the same cycle. The expected stream is
// the source sequence itself, starting at the marker.
module tb_deskew_fifo;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [13:0] src [0:511];
  logic [13:0] din [N];
  logic [N-1:0] seen, dval, ovf;
  logic [13:0] dout [N];
  logic arm;
  int checks = 0, failures = 0;
  int lat [N] = '{0, 3, 7};
  int t = 0;

  for (genvar c = 0; c < N; c++) begin : g
    deskew_fifo #(.SAMPLE_W(14), .DEPTH(16)) dut (
      .clk, .rst_n, .din(din[c]), .din_valid(1'b1), .arm, .sync_thr(14'd12000),
      .release_i(&seen), .sync_seen(seen[c]), .dout(dout[c]), .dout_valid(dval[c]),
      .overflow(ovf[c]));
  end

  // source: ramp 100.. with a sync marker (13000) at index 200
  initial for (int i = 0; i < 512; i++) src[i] = (i == 200) ? 14'd13000 : 14'(100 + i % 1000);
  always_comb for (int c = 0; c < N; c++) din[c] = (t - lat[c] >= 0) ? src[(t - lat[c]) % 512] : 14'd0;
  always @(posedge clk) t <= t + 1;

  int expect_idx = 200, outs = 0;
  initial begin
    arm = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    // wait for the outputs and check alignment
    while (outs < 100) begin
      @(negedge clk);
      if (dval[0]) begin
        for (int c = 0; c < N; c++) begin
          checks++;
          if (!dval[c] || dout[c] !== src[expect_idx]) begin
            failures++;
            $display("ch%0d out %0d expected %0d", c, dout[c], src[expect_idx]);
          end
        end
        expect_idx++;
        outs++;
      end
    end
    checks++; if (ovf != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
