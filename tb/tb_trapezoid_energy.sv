// tb_trapezoid_energy: exponentially decaying pulses (decay 500 samples) of
// several heights go through the filter with k = 50, m = 20, M = 500.
// Checks: (1) the filter output equals, sample by sample, a reference
// trapezoid computed in the testbench directly from the sample array;
// (2) each energy comes k + m/2 + 1 cycles after its trigger and equals the
// reference output at that sample shifted right by e_shift; (3) energy is
// proportional to pulse height (flat top); (4) a trigger while busy is ignored.
module tb_trapezoid_energy;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NS = 6000, K = 50, M = 20, PZ = 500, SH = 12;
  logic signed [15:0] din = 0;
  logic trig = 0;
  logic signed [47:0] trap;
  logic [15:0] energy;
  logic ev, busy;
  int checks = 0, failures = 0;
  int x [NS];
  longint sref [NS];
  int amps [4] = '{400, 1000, 2500, 4000};
  int t0s  [4] = '{300, 1500, 2800, 4300};
  int energies [$];
  int cyc = 0, trig_cyc = 0, ev_cyc [$];

  trapezoid_energy #(.DLY_DEPTH(256)) dut (.clk, .rst_n, .din, .din_valid(1'b1), .trig,
    .rise_k(10'(K)), .flat_m(10'(M)), .pz_m(16'(PZ)), .e_shift(6'(SH)), .bl(48'sd0),
    .trap, .energy, .energy_valid(ev), .busy);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev) ev_cyc.push_back(cyc);
  end

  initial begin
    for (int n = 0; n < NS; n++) begin
      real v;
      v = 0;
      for (int p = 0; p < 4; p++) if (n >= t0s[p]) v += amps[p] * $exp(-(n - t0s[p]) / 500.0);
      x[n] = int'(v);
    end
    // reference filter, written as explicit sums over the sample array
    begin
      longint p, s;
      p = 0; s = 0;
      for (int n = 0; n < NS; n++) begin
        longint d;
        d = longint'(x[n]) - ((n >= K) ? x[n-K] : 0) - ((n >= K+M) ? x[n-K-M] : 0)
            + ((n >= 2*K+M) ? x[n-2*K-M] : 0);
        p = p + d;
        s = s + p + PZ * d;
        sref[n] = s;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NS; n++) begin
      @(negedge clk);
      din = 16'(x[n]);
      trig = 0;
      // trigger two samples into each pulse; one extra trigger while busy
      for (int p = 0; p < 4; p++) if (n == t0s[p] + 2 || (p == 1 && n == t0s[p] + 20)) trig = 1;
      @(posedge clk); #1;
      checks++;
      if (trap !== 48'(sref[n])) begin
        failures++;
        if (failures < 5) $display("n=%0d trap %0d ref %0d", n, trap, sref[n]);
      end
      // energy_valid is visible k + m/2 + 1 edges after the edge taking the trigger
      if (ev) begin
        int p;
        p = energies.size();
        energies.push_back(int'(energy));
        checks++;
        if (p >= 4 || n != t0s[p] + 2 + K + M/2 + 1) begin
          failures++; $display("energy %0d at sample %0d", p, n);
        end else if (int'(energy) != int'(sref[n - 1] >>> SH)) begin
          failures++; $display("pulse %0d energy %0d ref %0d", p, energy, sref[n - 1] >>> SH);
        end
      end
    end
    checks++;
    if (energies.size() != 4) begin failures++; $display("%0d energies", energies.size()); end
    // proportionality to the pulse height
    for (int p = 0; p < energies.size() && p < 4; p++) begin
      real ratio, r3;
      ratio = real'(energies[p]) / amps[p];
      r3 = real'(energies[energies.size()-1]) / amps[energies.size()-1];
      checks++;
      if (ratio < 0.97 * r3 || ratio > 1.03 * r3) begin
        failures++; $display("pulse %0d ratio %f", p, ratio);
      end
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
