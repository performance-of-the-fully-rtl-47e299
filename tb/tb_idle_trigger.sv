// tb_idle_trigger: with no real triggers the idle trigger must fire exactly
// every idle_period cycles; a real trigger restarts the count; a period of
// zero disables it. Expected firing times are counted in the testbench.
module tb_idle_trigger;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic real_trig = 0, idle_trig;
  logic [31:0] period = 0;
  int checks = 0, failures = 0;
  idle_trigger dut (.clk, .rst_n, .real_trig, .idle_period(period), .idle_trig);

  int cyc = 0, last = 0;
  int fires [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && idle_trig) fires.push_back(cyc);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    checks++; if (fires.size() != 0) failures++;           // disabled
    @(negedge clk) period = 20;
    repeat (105) @(posedge clk);
    // fires spaced by exactly 20
    checks++; if (fires.size() < 4) failures++;
    for (int i = 1; i < fires.size(); i++) begin
      checks++;
      if (fires[i] - fires[i-1] != 20) begin failures++; $display("spacing %0d", fires[i]-fires[i-1]); end
    end
    // real trigger restarts the count
    fires.delete();
    @(negedge clk) real_trig = 1; last = cyc;
    @(negedge clk) real_trig = 0;
    repeat (30) @(posedge clk);
    checks++;
    // the pulse is registered 20 cycles after the real trigger is sampled and
    // recorded here at the following edge, hence 21
    if (fires.size() < 1 || fires[0] - last != 21) begin
      failures++; $display("after real trigger: %0d", (fires.size() > 0) ? fires[0]-last : -1);
    end
    // frequent real triggers suppress idle ones
    fires.delete();
    repeat (10) begin
      @(negedge clk) real_trig = 1;
      @(negedge clk) real_trig = 0;
      repeat (15) @(posedge clk);
    end
    checks++; if (fires.size() != 0) failures++;
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
