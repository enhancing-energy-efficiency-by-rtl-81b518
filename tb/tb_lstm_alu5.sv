// tb_lstm_alu5 -- self-checking testbench of ALU5. Applies random f, i, g, o,
// C_{t-1}, tanh(C_t) in both S3 modes and checks C_t, h_t, that only the
// selected result register changes and that its strobe comes one cycle later.
module tb_lstm_alu5;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0, valid = 1'b0;
  s3_sel_e s3 = S3_C;
  fx_t     f = '0, i = '0, g = '0, o = '0, c_prev = '0, tanh_c = '0;
  fx_t     c_t, h_t;
  logic    c_valid, h_valid;
  int      checks = 0, failures = 0;

  always #5 clk = ~clk;

  lstm_alu5 dut (.clk, .rst_n, .valid, .s3, .f, .i, .g, .o, .c_prev, .tanh_c,
                 .c_t, .c_valid, .h_t, .h_valid);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t ec, eh;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 2000; t++) begin
      bit mode_h;
      fx_t c_old, h_old;
      mode_h = $urandom % 2;
      f <= fx_t'($urandom % 257); i <= fx_t'($urandom % 257); o <= fx_t'($urandom % 257);
      g <= fx_t'($signed($urandom % 513) - 256);
      tanh_c <= fx_t'($signed($urandom % 513) - 256);
      c_prev <= (t % 7 == 0) ? fx_t'($urandom) : fx_t'($signed($urandom % 4096) - 2048);
      s3 <= mode_h ? S3_H : S3_C;
      valid <= 1'b1;
      #1;
      c_old = c_t; h_old = h_t;
      ec = fx_t'(ref_narrow(longint'(f) * longint'(c_prev) + longint'(i) * longint'(g)));
      eh = fx_t'(ref_narrow(longint'(o) * longint'(tanh_c)));
      @(posedge clk);
      valid <= 1'b0;
      #1;
      checks++;
      if (mode_h) begin
        if (h_t !== eh || !h_valid || c_valid || c_t !== c_old) begin
          failures++; $display("h mode: h=%0d exp %0d", h_t, eh);
        end
      end else begin
        if (c_t !== ec || !c_valid || h_valid || h_t !== h_old) begin
          failures++; $display("C mode: c=%0d exp %0d", c_t, ec);
        end
      end
      @(posedge clk);
      #1;
      checks++;
      if (c_valid || h_valid) begin failures++; $display("strobe longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
