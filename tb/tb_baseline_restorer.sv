// tb_baseline_restorer: drives a synthetic filter output: a noisy offset of
// 5000 with trapezoids of height 1,000,000 (rise 50, flat 20, fall 50), each
// announced by a trigger at its start. Checks: the estimate settles at the
// offset; it stays there through a train of pulses (the trigger window keeps
// them out of the average); it follows a slow change of the offset to 9000;
// it reads zero when disabled. Expected values are the offsets the
// testbench applies.
module tb_baseline_restorer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [47:0] din = 0, baseline;
  logic pulse = 0, en = 1;

  baseline_restorer #(.ACC_W(48), .DLY(16)) dut (.clk, .rst_n, .din, .din_valid(1'b1), .pulse,
    .blr_en(en), .blr_shift(4'd4), .blr_window(16'd200), .baseline);

  function automatic longint trap_shape(int i);
    if (i < 0) return 0;
    if (i < 50) return longint'(i) * 20000;
    if (i < 70) return 1000000;
    if (i < 120) return longint'(120 - i) * 20000;
    return 0;
  endfunction

  task automatic run(int n, int offset, int period, longint lo, longint hi, bit chk);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      pulse = (period > 0) && (i % period == 0);
      din = 48'(offset + int'($urandom_range(0, 200)) - 100 + ((period > 0) ? trap_shape(i % period) : 0));
      @(posedge clk); #1;
      if (chk) begin
        checks++;
        if (baseline < lo || baseline > hi) begin
          failures++; if (failures < 5) $display("baseline %0d not in [%0d,%0d]", baseline, lo, hi);
        end
      end
    end
    pulse = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(600, 5000, 0, 0, 0, 0);                  // settle
    run(300, 5000, 0, 4940, 5060, 1);
    run(3000, 5000, 300, 4940, 5060, 1);         // pulse train
    run(300, 9000, 0, 0, 0, 0);
    run(300, 9000, 0, 8940, 9060, 1);            // follows the new offset
    en = 0;
    run(10, 9000, 0, 0, 0, 1);                   // disabled
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
