// tb_trigger_l1: feeds step pulses of different heights on a flat baseline
// and checks that the trigger fires once, in the cycle after the first
// sample where x[n]-x[n-D] reaches the threshold, only for pulses above the
// threshold, and not again within the hold-off. A reference crossing time
// is computed from the sample array in the testbench.
module tb_trigger_l1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [15:0] din = 0;
  logic trig;
  int checks = 0, failures = 0;
  localparam int NS = 3000;
  logic signed [15:0] x [NS];
  int exp_fire [$], got_fire [$];

  trigger_l1 dut (.clk, .rst_n, .din, .din_valid(1'b1), .thr(16'd100), .diff(4'd4),
                  .holdoff(16'd100), .trig);

  // slow rise over 8 samples so the D=4 difference crosses mid-edge
  function automatic void add_pulse(int t0, int amp);
    for (int i = t0; i < NS; i++) begin
      int r;
      r = (i - t0 >= 8) ? amp : amp * (i - t0 + 1) / 8;
      x[i] = 16'(int'(x[i]) + r);
    end
  endfunction

  initial begin
    for (int i = 0; i < NS; i++) x[i] = 0;
    add_pulse(200, 300);    // fires
    add_pulse(700, 60);     // below threshold
    add_pulse(1200, 1000);  // fires
    add_pulse(1250, 1000);  // within hold-off: no fire
    add_pulse(2000, 250);   // fires
    // reference: the trigger is visible right after the edge that takes the
    // crossing sample n; rising crossing of x[n]-x[n-4] >= 100, armed, hold-off 100
    begin
      bit armed = 0; int hold = 0;
      for (int n = 0; n < NS; n++) begin
        int f; bit ab;
        f = int'(x[n]) - ((n >= 4) ? int'(x[n-4]) : 0);
        ab = f >= 100;
        if (hold > 0) hold--;
        if (armed && ab) begin exp_fire.push_back(n); armed = 0; hold = 100; end
        else if (!armed && !ab && hold == 0) armed = 1;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NS; n++) begin
      @(negedge clk) din = x[n];
      @(posedge clk); #1;
      if (trig) got_fire.push_back(n);
    end
    checks++;
    if (exp_fire.size() != 3 || got_fire.size() != exp_fire.size()) begin
      failures++; $display("fires expected %0d got %0d", exp_fire.size(), got_fire.size());
    end
    for (int i = 0; i < exp_fire.size() && i < got_fire.size(); i++) begin
      checks++;
      if (got_fire[i] != exp_fire[i]) begin failures++; $display("fire %0d at %0d expected %0d", i, got_fire[i], exp_fire[i]); end
    end
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
