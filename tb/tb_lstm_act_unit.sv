// tb_lstm_act_unit -- self-checking testbench of the activation path. Issues
// the tail's select sequence (S1 = f, i, o; S2 = g, then C) with random
// pre-activations and checks that each activated value lands in its own
// register two cycles after its select, that the others are untouched, and
// that the clamp flags follow the input range.
module tb_lstm_act_unit;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  fx_t     nact_f = '0, nact_i = '0, nact_o = '0, nact_g = '0, c_t = '0;
  logic    s1_en = 1'b0, s2_en = 1'b0;
  s1_sel_e s1 = S1_F;
  s2_sel_e s2 = S2_G;
  fx_t     f_t, i_t, o_t, g_t, tanh_c;
  logic    sig_clamped, tanh_clamped;
  int      checks = 0, failures = 0;
  int      n_sig_clamp = 0, n_tanh_clamp = 0;

  always #5 clk = ~clk;

  lstm_act_unit dut (.clk, .rst_n, .nact_f, .nact_i, .nact_o, .nact_g, .c_t,
                     .s1_en, .s1, .s2_en, .s2, .f_t, .i_t, .o_t, .g_t, .tanh_c,
                     .sig_clamped, .tanh_clamped);

  always @(posedge clk) begin
    if (sig_clamped)  n_sig_clamp++;
    if (tanh_clamped) n_tanh_clamp++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t rnd();
    return (($urandom % 4) == 0) ? fx_t'($urandom) : fx_t'($signed($urandom % 2048) - 1024);
  endfunction

  task automatic check(input string what, input fx_t got, input longint exp);
    checks++;
    if (got !== fx_t'(exp)) begin
      failures++;
      $display("%s = %0d, expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 1000; t++) begin
      fx_t ef, ei, eo, eg, ec;
      nact_f <= rnd(); nact_i <= rnd(); nact_o <= rnd(); nact_g <= rnd(); c_t <= rnd();
      #1;
      // cycle 0: S1 = f, S2 = g
      s1_en <= 1'b1; s1 <= S1_F; s2_en <= 1'b1; s2 <= S2_G;
      @(posedge clk);
      s1 <= S1_I; s2_en <= 1'b0;
      @(posedge clk);
      s1 <= S1_O; s2_en <= 1'b1; s2 <= S2_C;
      #1;
      check("f_t", f_t, ref_sigmoid(nact_f));
      check("g_t", g_t, ref_tanh(nact_g));
      @(posedge clk);
      s1_en <= 1'b0; s2_en <= 1'b0; s2 <= S2_G; s1 <= S1_F;
      #1;
      check("i_t", i_t, ref_sigmoid(nact_i));
      check("g_t held", g_t, ref_tanh(nact_g));
      @(posedge clk);
      #1;
      check("o_t", o_t, ref_sigmoid(nact_o));
      check("tanh_c", tanh_c, ref_tanh(c_t));
      check("f_t held", f_t, ref_sigmoid(nact_f));
      @(posedge clk);
    end
    checks++;
    if (n_sig_clamp == 0 || n_tanh_clamp == 0) begin
      failures++;
      $display("clamping never seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
