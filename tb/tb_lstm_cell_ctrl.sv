// tb_lstm_cell_ctrl -- self-checking testbench of the cell control state
// machine. Runs recursions back to back (start held high) and one after an
// idle gap, and checks cycle by cycle against the documented schedule:
// operand/weight addresses, MAC strobes, the 8-cycle tail (S1 = f,i,o;
// S2 = g then C; S3 = C then h) of row n-1 inside slot n, and that a
// recursion lasts exactly 2*(N_I+N_H)*(N_H+1) cycles.
module tb_lstm_cell_ctrl;
  import lstm_pkg::*;

  localparam int N_I = 1, N_H = 20, N = N_I + N_H, SLOT = 2 * N;
  localparam int REC = SLOT * (N_H + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic accept, busy, done, swap, rd_en, mac_en, mac_first, mac_last;
  logic tail_active, s1_en, s2_en, c_rd_en, alu5_valid;
  logic [4:0] rd_addr, b_addr, tail_idx;
  logic [8:0] w_addr;
  s1_sel_e s1;
  s2_sel_e s2;
  s3_sel_e s3;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lstm_cell_ctrl #(.N_I(N_I), .N_H(N_H)) dut (.clk, .rst_n, .start, .accept, .busy, .done, .swap,
    .rd_en, .rd_addr, .w_addr, .b_addr, .mac_en, .mac_first, .mac_last,
    .tail_idx, .tail_active, .s1_en, .s1, .s2_en, .s2, .c_rd_en, .alu5_valid, .s3);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(input string what, input int c, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("cycle %0d: %s = %0b, expected %0b", c, what, got, exp);
    end
  endtask

  // Check one recursion whose first slot cycle is the current cycle.
  task automatic check_recursion(input bit hold_start);
    int n_mac = 0;
    for (int c = 0; c < REC; c++) begin
      int slot, cyc, k, tc;
      bit mac_slot, tail;
      slot = c / SLOT; cyc = c % SLOT; k = cyc / 2; tc = cyc;
      mac_slot = slot < N_H;
      tail = slot >= 1;
      #1;
      expect_bit("busy", c, busy, 1'b1);
      expect_bit("rd_en", c, rd_en, mac_slot && (cyc % 2 == 0));
      expect_bit("mac_en", c, mac_en, mac_slot && (cyc % 2 == 1));
      if (mac_slot && cyc % 2 == 0) begin
        checks++;
        if (int'(rd_addr) != k || int'(w_addr) != slot * N + k || int'(b_addr) != slot) begin
          failures++; $display("cycle %0d: addresses %0d %0d %0d", c, rd_addr, w_addr, b_addr);
        end
      end
      if (mac_en) begin
        n_mac++;
        expect_bit("mac_first", c, mac_first, k == 0);
        expect_bit("mac_last", c, mac_last, k == N - 1);
      end
      expect_bit("s1_en", c, s1_en, tail && tc <= 2);
      expect_bit("s2_en", c, s2_en, tail && (tc == 0 || tc == 4));
      expect_bit("c_rd_en", c, c_rd_en, tail && tc == 0);
      expect_bit("alu5_valid", c, alu5_valid, tail && (tc == 3 || tc == 6));
      if (tail && tc <= 2) begin
        checks++;
        if (s1 != ((tc == 0) ? S1_F : (tc == 1) ? S1_I : S1_O)) begin failures++; $display("cycle %0d: S1 wrong", c); end
      end
      if (tail && (tc == 0 || tc == 4)) begin
        checks++;
        if (s2 != ((tc == 0) ? S2_G : S2_C)) begin failures++; $display("cycle %0d: S2 wrong", c); end
      end
      if (tail && (tc == 3 || tc == 6)) begin
        checks++;
        if (s3 != ((tc == 3) ? S3_C : S3_H)) begin failures++; $display("cycle %0d: S3 wrong", c); end
      end
      if (tail) begin
        checks++;
        if (int'(tail_idx) != slot - 1) begin failures++; $display("cycle %0d: tail_idx %0d", c, tail_idx); end
      end
      expect_bit("done", c, done, c == REC - 1);
      expect_bit("swap", c, swap, c == REC - 1);
      expect_bit("accept", c, accept, (c == REC - 1) && hold_start);
      @(posedge clk);
    end
    checks++;
    if (n_mac != N_H * N) begin failures++; $display("%0d MACs, expected %0d", n_mac, N_H * N); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    #1;
    expect_bit("idle busy", -1, busy, 1'b0);
    start <= 1'b1;
    #1;
    expect_bit("accept when idle", -1, accept, 1'b1);
    @(posedge clk);
    check_recursion(1'b1);   // start still high: next one follows at once
    start <= 1'b0;
    check_recursion(1'b0);
    #1;
    expect_bit("idle after", -1, busy, 1'b0);
    repeat (5) @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    check_recursion(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
