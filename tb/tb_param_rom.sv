// tb_param_rom -- self-checking testbench of the parameter ROM. Reads every
// address of a weight ROM and a bias ROM in random order, checks the data one
// cycle later against the parameter set and its value range, and checks that
// the output holds while `en` is low.
module tb_param_rom;
  import lstm_pkg::*;

  localparam int DW = 420, DB = 20;
  logic       clk = 1'b0, en = 1'b0;
  logic [8:0] aw = '0;
  logic [4:0] ab = '0;
  fx_t        dw, db;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  param_rom #(.ID(PID_WG), .DEPTH(DW)) u_w (.clk, .en, .addr(aw), .data(dw));
  param_rom #(.ID(PID_BO), .DEPTH(DB)) u_b (.clk, .en, .addr(ab), .data(db));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nonzero = 0;
    @(posedge clk);
    for (int t = 0; t < 3 * DW; t++) begin
      int a, b;
      a = (t < DW) ? t : int'($urandom % DW);
      b = a % DB;
      en <= 1'b1; aw <= 9'(a); ab <= 5'(b);
      @(posedge clk);
      #1;
      checks += 2;
      if (dw !== param_value(PID_WG, a) || dw > 63 || dw < -64) begin
        failures++; $display("W[%0d] = %0d", a, dw);
      end
      if (db !== param_value(PID_BO, b) || db > 127 || db < -128) begin
        failures++; $display("b[%0d] = %0d", b, db);
      end
      if (dw != 0) nonzero++;
      if (t % 50 == 0) begin
        fx_t held;
        held = dw;
        en <= 1'b0; aw <= ~aw;
        @(posedge clk);
        #1;
        checks++;
        if (dw !== held) begin failures++; $display("output not held"); end
      end
    end
    checks++;
    if (nonzero < DW) begin failures++; $display("ROM mostly zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
