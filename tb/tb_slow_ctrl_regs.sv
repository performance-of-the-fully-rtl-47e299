// tb_slow_ctrl_regs: writes random values to every per-channel and global
// register and reads them back, checks that the configuration outputs carry
// the written fields, that reset defaults read back, that control bits give
// one-cycle pulses and that status inputs appear at their addresses.
module tb_slow_ctrl_regs;
  import galileo_pkg::*;
  localparam int N = 36;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [11:0] addr = 0;
  logic wr = 0, rd = 0;
  logic [31:0] wdata = 0, rdata;
  ch_cfg_t cfg [N];
  logic deskew_arm, lt_arm, ts_load;
  logic [13:0] sync_thr;
  lt_mode_e lt_mode;
  logic [5:0] lt_ch;
  logic [3:0] lt_hshift;
  logic [31:0] lt_len;
  logic [47:0] ts_value;
  logic aligned = 1, lt_busy = 0, lt_done = 1;
  logic [15:0] hist_drop = 16'h5a5a;
  logic [47:0] timestamp = 48'hABCD_0123_4567;
  logic [15:0] lost_cnt [N], reject_cnt [N], timeout_cnt [N];

  slow_ctrl_regs #(.NUM_CH(N)) dut (.*);

  task automatic wr_reg(int a, logic [31:0] d);
    @(negedge clk); addr = 12'(a); wdata = d; wr = 1;
    @(negedge clk); wr = 0;
  endtask
  task automatic rd_reg(int a, output logic [31:0] d);
    @(negedge clk); addr = 12'(a); rd = 1;
    @(negedge clk); rd = 0; d = rdata;
  endtask
  task automatic expect_eq(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin failures++; $display("%s: got %h want %h", what, got, want); end
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] w [N][6];
    for (int c = 0; c < N; c++) begin
      lost_cnt[c] = 16'(c); reject_cnt[c] = 16'(100 + c); timeout_cnt[c] = 16'(200 + c);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    rd_reg(0, d);        expect_eq(d, 32'h4741_4C49, "id");
    rd_reg('h100 + 8*5 + 3, d); expect_eq(d, {6'd0, 10'd50, 6'd0, 10'd200}, "default k/m");
    for (int c = 0; c < N; c++) for (int r = 0; r < 6; r++) begin
      w[c][r] = $urandom;
      wr_reg('h100 + 8*c + r, w[c][r]);
    end
    for (int c = 0; c < N; c++) begin
      rd_reg('h100 + 8*c + 0, d); expect_eq(d, {w[c][0][31:30], 10'd0, w[c][0][19:0]}, "reg0");
      rd_reg('h100 + 8*c + 1, d); expect_eq(d, {16'd0, w[c][1][15:0]}, "reg1");
      rd_reg('h100 + 8*c + 2, d); expect_eq(d, w[c][2], "reg2");
      rd_reg('h100 + 8*c + 3, d); expect_eq(d, {6'd0, w[c][3][25:16], 6'd0, w[c][3][9:0]}, "reg3");
      rd_reg('h100 + 8*c + 4, d); expect_eq(d, {10'd0, w[c][4][21:0]}, "reg4");
      rd_reg('h100 + 8*c + 5, d); expect_eq(d, {12'd0, w[c][5][19:0]}, "reg5");
      rd_reg('h100 + 8*c + 6, d); expect_eq(d, {16'(100 + c), 16'(c)}, "stat6");
      rd_reg('h100 + 8*c + 7, d); expect_eq(d, 32'(200 + c), "stat7");
      expect_eq(32'(cfg[c].trig_thr), 32'(w[c][0][15:0]), "cfg thr");
      expect_eq(32'(cfg[c].pz_m), 32'(w[c][4][15:0]), "cfg pz");
      expect_eq(32'(cfg[c].flat_m), 32'(w[c][3][25:16]), "cfg m");
      expect_eq(32'(cfg[c].idle_period), w[c][2], "cfg idle");
    end
    // globals
    wr_reg(2, 32'd9000);      expect_eq(32'(sync_thr), 9000, "sync thr");
    wr_reg(3, 32'h0003_2503); expect_eq({lt_hshift, lt_ch, 6'(lt_mode)}, {4'h3, 6'h25, 6'd3}, "lt cfg");
    wr_reg(5, 32'h8765_4321); wr_reg(6, 32'h0000_BEEF);
    expect_eq(ts_value[31:0], 32'h8765_4321, "ts lo"); expect_eq(32'(ts_value[47:32]), 32'hBEEF, "ts hi");
    rd_reg(7, d); expect_eq(d, {16'h5a5a, 13'd0, 3'b101}, "status");
    rd_reg(8, d); expect_eq(d, 32'h0123_4567, "timestamp lo");
    rd_reg(9, d); expect_eq(d, 32'hABCD, "timestamp hi");
    // control pulses last one cycle
    @(negedge clk); addr = 1; wdata = 7; wr = 1;
    @(negedge clk); wr = 0;
    expect_eq({29'd0, deskew_arm, lt_arm, ts_load}, 7, "pulses on");
    @(negedge clk);
    expect_eq({29'd0, deskew_arm, lt_arm, ts_load}, 0, "pulses off");
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
