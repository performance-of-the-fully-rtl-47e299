// tb_spectra_trace_ram: runs the three uses of the long-trace/spectrum RAM
// (DEPTH reduced to 1024 words) and reads the memory back over the host
// port. Free-running trace: the recorded words must be the sample ramp fed
// from arm on, two samples per word. Triggered trace: recording must start
// with the sample that comes with the trigger. Histogram: a list of
// energies is counted in the testbench and every bin must match, including
// the last bin collecting overflows, after the host has cleared the RAM.
module tb_spectra_trace_ram;
  import galileo_pkg::*;
  localparam int D = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  lt_mode_e mode = LT_OFF;
  logic arm = 0, trig = 0, energy_valid = 0;
  logic [10:0] len = 0;
  logic [3:0] h_shift = 4'd2;
  logic [15:0] din = 0, energy = 0, hist_drop;
  logic lt_busy, lt_done;
  logic [9:0] h_addr = 0;
  logic h_rd = 0, h_wr = 0;
  logic [31:0] h_wdata = 0, h_rdata;

  spectra_trace_ram #(.DEPTH(D)) dut (.clk, .rst_n, .mode, .arm, .len, .h_shift, .din,
    .din_valid(1'b1), .trig, .energy, .energy_valid, .lt_busy, .lt_done, .hist_drop,
    .h_addr, .h_rd, .h_wr, .h_wdata, .h_rdata);

  // sample ramp
  always @(posedge clk) din <= din + 16'd1;

  task automatic host_rd(int a, output logic [31:0] d);
    @(negedge clk); h_addr = 10'(a); h_rd = 1;
    @(negedge clk); h_rd = 0; d = h_rdata;
  endtask

  int hist [D];

  initial begin
    logic [31:0] d;
    logic [15:0] first;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- free-running long trace of 300 words
    // recording starts with the sample after the edge that takes arm
    @(negedge clk); mode = LT_FREE; len = 11'd300; arm = 1; first = din + 16'd1;
    @(negedge clk); arm = 0;
    wait (lt_done);
    checks++; if (lt_busy) failures++;
    for (int i = 0; i < 300; i++) begin
      host_rd(i, d);
      checks++;
      if (d !== {first + 16'(2*i + 1), first + 16'(2*i)}) begin
        failures++; if (failures < 5) $display("free word %0d = %h", i, d);
      end
    end
    // ---- triggered long trace of 100 words
    @(negedge clk); mode = LT_TRIGGERED; len = 11'd100; arm = 1;
    @(negedge clk); arm = 0;
    repeat (37) @(negedge clk);
    checks++; if (!lt_busy || lt_done) failures++;   // waiting for the trigger
    trig = 1;
    @(negedge clk); trig = 0; first = din;
    wait (lt_done);
    for (int i = 0; i < 100; i++) begin
      host_rd(i, d);
      checks++;
      if (d !== {first + 16'(2*i + 1), first + 16'(2*i)}) begin
        failures++; if (failures < 5) $display("trig word %0d = %h (first %h)", i, d, first);
      end
    end
    // ---- histogram: clear, then 500 energies, at least 3 cycles apart
    mode = LT_OFF;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); h_addr = 10'(i); h_wdata = 0; h_wr = 1; hist[i] = 0;
    end
    @(negedge clk); h_wr = 0; mode = LT_HISTO;
    for (int i = 0; i < 500; i++) begin
      int e, b;
      e = (i % 10 == 0) ? 5000 + i : $urandom_range(0, 600);
      b = e >> 2; if (b > D - 1) b = D - 1;
      hist[b]++;
      @(negedge clk); energy = 16'(e); energy_valid = 1;
      @(negedge clk); energy_valid = 0;
      repeat ($urandom_range(1, 3)) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    mode = LT_OFF;
    for (int i = 0; i < D; i++) begin
      host_rd(i, d);
      checks++;
      if (d != 32'(hist[i])) begin failures++; if (failures < 5) $display("bin %0d = %0d want %0d", i, d, hist[i]); end
    end
    checks++; if (hist_drop != 0) failures++;
    // back-to-back energies: the second is dropped and counted
    mode = LT_HISTO;
    @(negedge clk); energy = 16'd40; energy_valid = 1;
    @(negedge clk); energy = 16'd44;
    @(negedge clk); energy_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (hist_drop != 1) failures++;
    mode = LT_OFF;
    host_rd(10, d); checks++; if (d != 32'(hist[10] + 1)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
