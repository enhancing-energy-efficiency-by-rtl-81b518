// tb_lstm_layer -- self-checking testbench of the LSTM layer: loads a
// 6-sample sequence, runs it and compares the final hidden state with the
// bit-exact reference, for several sequences. Checks that the layer needs
// exactly N_STEP * 2*(N_I+N_H)*(N_H+1) = 5292 cycles after the start cycle,
// and that each sequence starts again from the zero state.
module tb_lstm_layer;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  localparam int N_I = 1, N_H = 20, N_STEP = 6;
  localparam int N_LL = N_STEP * 2 * (N_I + N_H) * (N_H + 1);

  logic       clk = 1'b0, rst_n = 1'b0, x_we = 1'b0, start = 1'b0, busy, done, ext_en = 1'b0;
  logic [2:0] x_addr = '0;
  logic [4:0] ext_addr = '0;
  fx_t        x_data = '0, ext_data;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  lstm_layer dut (.clk, .rst_n, .x_we, .x_addr, .x_data, .start, .busy, .done,
                  .ext_en, .ext_addr, .ext_data);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fxv_t h [], c [], xv [];
    h = new[N_H]; c = new[N_H]; xv = new[N_I];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int run = 0; run < 4; run++) begin
      fx_t seq [N_STEP];
      int  cycles;
      foreach (seq[s]) seq[s] = fx_t'($signed($urandom % 4096) - 2048);
      for (int s = 0; s < N_STEP; s++) begin
        x_we <= 1'b1; x_addr <= 3'(s); x_data <= seq[s];
        @(posedge clk);
      end
      x_we <= 1'b0;
      cycles = 0;
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      do begin
        @(posedge clk);
        cycles++;
      end while (!done);
      checks++;
      if (cycles != N_LL) begin failures++; $display("layer took %0d cycles, expected %0d", cycles, N_LL); end
      foreach (h[k]) begin h[k] = 0; c[k] = 0; end
      for (int s = 0; s < N_STEP; s++) begin
        xv[0] = seq[s];
        ref_step(xv, h, c);
      end
      @(posedge clk);
      for (int k = 0; k < N_H; k++) begin
        ext_en <= 1'b1; ext_addr <= 5'(k);
        @(posedge clk);
        #1;
        checks++;
        if (ext_data !== fx_t'(h[k])) begin failures++; $display("run %0d: h[%0d] = %0d expected %0d", run, k, ext_data, h[k]); end
      end
      ext_en <= 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
