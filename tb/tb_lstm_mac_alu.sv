// tb_lstm_mac_alu -- self-checking testbench of the multiply-accumulate ALU.
// Feeds random rows (one operand pair every two cycles, as the cell does, and
// also back to back), including rows that overflow, and checks y, y_sat and
// that y_valid comes exactly one cycle after the last MAC.
module tb_lstm_mac_alu;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mac_en = 1'b0, first = 1'b0, last = 1'b0;
  fx_t  a = '0, w = '0, bias = '0, y;
  logic y_valid, y_sat;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  lstm_mac_alu dut (.clk, .rst_n, .mac_en, .first, .last, .a, .w, .bias, .y, .y_valid, .y_sat);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_row(input int len, input int gap, input bit big);
    longint acc, e;
    bit     esat;
    fx_t    av [], wv [];
    av   = new[len];
    wv   = new[len];
    bias = fx_t'($urandom);
    if (!big) bias = bias >>> 6;
    acc  = longint'(bias) * 256;
    for (int k = 0; k < len; k++) begin
      av[k] = fx_t'($urandom);
      wv[k] = fx_t'($urandom);
      if (!big) begin av[k] = av[k] >>> 4; wv[k] = wv[k] >>> 6; end
      acc += longint'(av[k]) * longint'(wv[k]);
    end
    e    = ref_narrow(acc);
    esat = ((acc >>> 8) > 32767) || ((acc >>> 8) < -32768);
    for (int k = 0; k < len; k++) begin
      repeat (gap) begin
        mac_en <= 1'b0;
        @(posedge clk);
      end
      mac_en <= 1'b1; first <= (k == 0); last <= (k == len - 1);
      a <= av[k]; w <= wv[k];
      @(posedge clk);
      #1;
      if (k < len - 1) begin
        checks++;
        if (y_valid) begin failures++; $display("early y_valid"); end
      end
    end
    mac_en <= 1'b0; first <= 1'b0; last <= 1'b0;
    checks++;
    if (!y_valid || y !== fx_t'(e) || y_sat !== esat) begin
      failures++;
      $display("row len=%0d: y=%0d valid=%0b sat=%0b expected %0d sat=%0b", len, y, y_valid, y_sat, e, esat);
    end
    @(posedge clk);
    #1;
    checks++;
    if (y_valid || y !== fx_t'(e)) begin failures++; $display("y not held"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int r = 0; r < 300; r++) run_row(1 + ($urandom % 25), (r % 2 == 0) ? 1 : 0, r % 5 == 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
