// tb_lstm_cell -- self-checking testbench of the LSTM cell at its default
// size (one input, hidden size 20). Runs a sequence of recursions from
// C_0 = h_0 = 0 with random inputs, compares h_t (read through the ext port)
// and C_t (inside the state memory) with the bit-exact reference after each
// recursion, and checks that a recursion takes 2*(N_I+N_H)*(N_H+1) = 882
// cycles from the cycle after `accept` to `done`. A `clear` in the middle
// restarts from the zero state.
module tb_lstm_cell;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  localparam int N_I = 1, N_H = 20, REC = 2 * (N_I + N_H) * (N_H + 1);

  logic       clk = 1'b0, rst_n = 1'b0, clear = 1'b0, start = 1'b0;
  fx_t        x_in [N_I];
  logic       accept, busy, done, ext_en = 1'b0;
  logic [4:0] ext_addr = '0;
  fx_t        ext_data;
  int         checks = 0, failures = 0;
  fxv_t       h [], c [], xv [];

  always #5 clk = ~clk;

  lstm_cell #(.N_I(N_I), .N_H(N_H)) dut (.clk, .rst_n, .clear, .start, .x_in, .accept, .busy, .done,
                                        .ext_en, .ext_addr, .ext_data);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic recursion(input bit do_clear);
    int cycles = 0;
    if (do_clear) begin
      foreach (h[k]) begin h[k] = 0; c[k] = 0; end
    end
    foreach (x_in[e]) begin
      x_in[e] = fx_t'($signed($urandom % 2048) - 1024);   // within +-4.0
      xv[e]   = x_in[e];
    end
    clear <= do_clear;
    start <= 1'b1;
    #1;
    checks++;
    if (!accept) begin failures++; $display("start not accepted"); end
    @(posedge clk);
    clear <= 1'b0;
    start <= 1'b0;
    do begin
      @(posedge clk);
      cycles++;
    end while (!done);
    checks++;
    if (cycles != REC) begin failures++; $display("recursion took %0d cycles, expected %0d", cycles, REC); end
    ref_step(xv, h, c);
    @(posedge clk);   // idle now
    for (int k = 0; k < N_H; k++) begin
      ext_en <= 1'b1; ext_addr <= 5'(k);
      @(posedge clk);
      #1;
      checks += 2;
      if (ext_data !== fx_t'(h[k])) begin failures++; $display("h[%0d] = %0d expected %0d", k, ext_data, h[k]); end
      if (dut.u_c.mem[k] !== fx_t'(c[k])) begin failures++; $display("C[%0d] = %0d expected %0d", k, dut.u_c.mem[k], c[k]); end
    end
    ext_en <= 1'b0;
  endtask

  initial begin
    h = new[N_H]; c = new[N_H]; xv = new[N_I];
    foreach (x_in[e]) x_in[e] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    #1;
    for (int s = 0; s < 12; s++) recursion(s == 0 || s == 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
