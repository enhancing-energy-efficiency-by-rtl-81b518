// tb_lstm_model -- end-to-end testbench of the accelerator at its default
// size (1 input, hidden size 20, 6 steps, 1 output, Q8.8, tables of depth
// 256). Loads several 6-sample sequences, runs each inference, compares the
// prediction with the bit-exact reference and checks that `done` comes
// n_ll + n_dense + 2 = 5292 + 40 + 2 cycles after `start`.
//
// It also counts how often each mechanism of the design is exercised and
// fails if one never is: the overlap of a row's MACs with the previous row's
// activation/C/h tail, each S1 / S2 / S3 selection, back-to-back recursions,
// the h-bank swap, the zero state at the start of a sequence, clamping in
// both activation tables, and the dense layer.
module tb_lstm_model;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  localparam int N_I = 1, N_H = 20, N_STEP = 6, N_O = 1;
  localparam int N_TOTAL = N_STEP * (N_I + N_H) * 2 * (N_H + 1) + N_H * N_O * 2;

  logic       clk = 1'b0, rst_n = 1'b0, x_we = 1'b0, start = 1'b0, busy, done;
  logic [2:0] x_addr = '0;
  fx_t        x_data = '0;
  fx_t        y [N_O];
  int         checks = 0, failures = 0;

  // mechanism counters
  int n_overlap = 0, n_s1 [3] = '{0, 0, 0}, n_s2 [2] = '{0, 0}, n_s3 [2] = '{0, 0};
  int n_b2b = 0, n_swap = 0, n_clear = 0, n_sig_clamp = 0, n_tanh_clamp = 0, n_dense = 0;

  always #5 clk = ~clk;

  lstm_model dut (.clk, .rst_n, .x_we, .x_addr, .x_data, .start, .busy, .done, .y);

  always @(posedge clk) begin
    if (dut.u_layer.u_cell.mac_en && dut.u_layer.u_cell.tail_active) n_overlap++;
    if (dut.u_layer.u_cell.s1_en) n_s1[dut.u_layer.u_cell.s1]++;
    if (dut.u_layer.u_cell.s2_en) n_s2[dut.u_layer.u_cell.s2]++;
    if (dut.u_layer.u_cell.alu5_valid) n_s3[dut.u_layer.u_cell.s3]++;
    if (dut.u_layer.u_cell.accept && dut.u_layer.u_cell.done) n_b2b++;
    if (dut.u_layer.u_cell.swap) n_swap++;
    if (dut.u_layer.u_cell.clear) n_clear++;
    if (dut.u_layer.u_cell.sig_clamped) n_sig_clamp++;
    if (dut.u_layer.u_cell.tanh_clamped) n_tanh_clamp++;
    if (dut.u_dense.mac_en) n_dense++;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic require(input string what, input int count);
    checks++;
    if (count == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("%-28s %0d", what, count);
  endtask

  initial begin
    fxv_t h [], c [], xv [];
    h = new[N_H]; c = new[N_H]; xv = new[N_I];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int run = 0; run < 5; run++) begin
      fx_t  seq [N_STEP];
      int   cycles;
      fxv_t e;
      // runs 0..3: normalised speeds in [-2, 2); run 4: large values that
      // drive the gate pre-activations beyond the table intervals
      foreach (seq[s]) seq[s] = (run == 4) ? fx_t'(((s % 2) ? 1 : -1) * (12000 + $urandom % 8000))
                                           : fx_t'($signed($urandom % 1024) - 512);
      while (busy) @(posedge clk);
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
      if (cycles != N_TOTAL + 2) begin failures++; $display("inference took %0d cycles, expected %0d", cycles, N_TOTAL + 2); end
      foreach (h[k]) begin h[k] = 0; c[k] = 0; end
      for (int s = 0; s < N_STEP; s++) begin
        xv[0] = seq[s];
        ref_step(xv, h, c);
      end
      e = ref_dense(h, 0);
      checks++;
      if (y[0] !== fx_t'(e)) begin failures++; $display("run %0d: y = %0d expected %0d", run, y[0], e); end
      else $display("run %0d: prediction %0d/256 after %0d cycles", run, y[0], cycles);
      @(posedge clk);
    end
    require("row/tail overlap cycles", n_overlap);
    require("S1 = f", n_s1[0]);
    require("S1 = i", n_s1[1]);
    require("S1 = o", n_s1[2]);
    require("S2 = g", n_s2[0]);
    require("S2 = C", n_s2[1]);
    require("S3 = C", n_s3[0]);
    require("S3 = h", n_s3[1]);
    require("back-to-back recursions", n_b2b);
    require("h bank swaps", n_swap);
    require("state clears", n_clear);
    require("sigmoid input clamped", n_sig_clamp);
    require("tanh input clamped", n_tanh_clamp);
    require("dense MAC cycles", n_dense);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
