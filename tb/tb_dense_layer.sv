// tb_dense_layer -- self-checking testbench of the dense layer. A small
// behavioural memory with a synchronous read port supplies h; the testbench
// checks y[o] = narrow(b[o]*2^8 + sum_k W[o][k]*h[k]) for every output, for
// N_O = 1 (the evaluated model) and N_O = 3, and that `done` pulses exactly
// 2*N_F*N_O + 2 cycles after `start`.
module tb_dense_layer;
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;

  localparam int N_F = 20;
  logic       clk = 1'b0, rst_n = 1'b0, start1 = 1'b0, start3 = 1'b0;
  logic       busy1, done1, h_en1, busy3, done3, h_en3;
  logic [4:0] h_addr1, h_addr3;
  fx_t        h_data1, h_data3;
  fx_t        y1 [1];
  fx_t        y3 [3];
  fx_t        hmem [N_F];
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (h_en1) h_data1 <= hmem[h_addr1];
    if (h_en3) h_data3 <= hmem[h_addr3];
  end

  dense_layer #(.N_F(N_F), .N_O(1)) dut1 (.clk, .rst_n, .start(start1), .busy(busy1), .done(done1),
    .h_en(h_en1), .h_addr(h_addr1), .h_data(h_data1), .y(y1));
  dense_layer #(.N_F(N_F), .N_O(3)) dut3 (.clk, .rst_n, .start(start3), .busy(busy3), .done(done3),
    .h_en(h_en3), .h_addr(h_addr3), .h_data(h_data3), .y(y3));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n_o);
    int   cycles = 0;
    fxv_t hv [];
    hv = new[N_F];
    foreach (hmem[k]) begin
      hmem[k] = fx_t'($signed($urandom % 512) - 256);
      hv[k]   = hmem[k];
    end
    if (n_o == 1) start1 <= 1'b1; else start3 <= 1'b1;
    @(posedge clk);
    start1 <= 1'b0; start3 <= 1'b0;
    do begin
      @(posedge clk);
      cycles++;
    end while (!((n_o == 1) ? done1 : done3));
    checks++;
    if (cycles != 2 * N_F * n_o + 2) begin
      failures++; $display("N_O=%0d: done after %0d cycles, expected %0d", n_o, cycles, 2 * N_F * n_o + 2);
    end
    for (int o = 0; o < n_o; o++) begin
      fx_t got;
      fxv_t exp;
      got = (n_o == 1) ? y1[0] : y3[o];
      exp = (n_o == 1) ? ref_dense(hv, 0) : (o == 0 ? ref_dense(hv, 0) : 0);
      if (n_o == 3) begin
        // weights of output o sit at o*N_F + k in the same ROM layout
        longint acc;
        acc = w_of(9, o) * 256;
        for (int k = 0; k < N_F; k++) acc += w_of(8, o * N_F + k) * hv[k];
        exp = ref_narrow(acc);
      end
      checks++;
      if (got !== fx_t'(exp)) begin failures++; $display("N_O=%0d y[%0d] = %0d expected %0d", n_o, o, got, exp); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int r = 0; r < 20; r++) run((r % 2) ? 3 : 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
