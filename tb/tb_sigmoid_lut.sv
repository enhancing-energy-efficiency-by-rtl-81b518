// tb_sigmoid_lut -- self-checking testbench of the sigmoid lookup table. Sweeps
// all 65536 inputs: each output must equal the reference table entry, lie
// within 0.04 of the exact sigmoid of the input inside the table's interval
// (half a bin times the largest slope plus rounding), appear one cycle after
// `en` and hold while `en` is low; `clamped` must flag inputs outside the
// interval.
module tb_sigmoid_lut;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  logic clk = 1'b0, en = 1'b0, clamped;
  fx_t  x = '0, y;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  sigmoid_lut dut (.clk, .en, .x, .y, .clamped);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int v = -32768; v < 32768; v++) begin
      longint e;
      real    xr, tr;
      bit     outside;
      en <= 1'b1;
      x  <= fx_t'(v);
      @(posedge clk);
      #1;
      e  = ref_sigmoid(longint'(v));
      xr = real'(v) / 256.0;
      tr = 1.0 / (1.0 + $exp(-xr));
      outside = (xr < -8.0) || (xr >= 8.0);
      checks++;
      if (y !== fx_t'(e) || clamped !== outside) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d expected %0d clamped=%0b", v, y, e, clamped);
      end
      if (!outside) begin
        checks++;
        if ((real'(y) / 256.0 - tr > 0.04) || (tr - real'(y) / 256.0 > 0.04)) begin
          failures++;
          if (failures < 10) $display("x=%0d y=%0d far from %f", v, y, tr);
        end
      end
      if (v % 4096 == 0) begin
        fx_t held;
        held = y;
        en <= 1'b0;
        x  <= ~x;
        @(posedge clk);
        #1;
        checks++;
        if (y !== held) begin failures++; $display("output not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
