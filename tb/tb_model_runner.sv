// tb_model_runner -- helper for tb_lstm_model_sizes: instantiates lstm_model
// with the given sizes, runs RUNS complete inferences on random sequences and
// compares every output and the latency n_ll + n_dense + 2 with the bit-exact
// reference. Reports its counts through ports and raises `finished`.
module tb_model_runner
  import lstm_pkg::*;
  import tb_lstm_ref_pkg::*;
#(
  parameter int N_I    = 1,
  parameter int N_H    = 20,
  parameter int N_STEP = 6,
  parameter int N_O    = 1,
  parameter int DEPTH  = 256,
  parameter int RUNS   = 3
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);

  localparam int XAW = (N_STEP * N_I > 1) ? $clog2(N_STEP * N_I) : 1;
  localparam int N_TOTAL = N_STEP * (N_I + N_H) * 2 * (N_H + 1) + N_H * N_O * 2;

  logic           x_we, start, busy, done;
  logic [XAW-1:0] x_addr;
  fx_t            x_data;
  fx_t            y [N_O];

  lstm_model #(.N_I(N_I), .N_H(N_H), .N_STEP(N_STEP), .N_O(N_O), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .x_we, .x_addr, .x_data, .start, .busy, .done, .y
  );

  initial begin
    fxv_t h [], c [], xv [];
    checks = 0; failures = 0; finished = 1'b0;
    x_we = 1'b0; start = 1'b0; x_addr = '0; x_data = '0;
    h = new[N_H]; c = new[N_H]; xv = new[N_I];
    @(posedge rst_n);
    @(posedge clk);
    for (int run = 0; run < RUNS; run++) begin
      fx_t seq [N_STEP * N_I];
      int  cycles;
      foreach (seq[s]) seq[s] = fx_t'($signed($urandom % 2048) - 1024);
      for (int s = 0; s < N_STEP * N_I; s++) begin
        x_we <= 1'b1; x_addr <= XAW'(s); x_data <= seq[s];
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
      if (cycles != N_TOTAL + 2) begin
        failures++;
        $display("N_H=%0d DEPTH=%0d: %0d cycles, expected %0d", N_H, DEPTH, cycles, N_TOTAL + 2);
      end
      foreach (h[k]) begin h[k] = 0; c[k] = 0; end
      for (int s = 0; s < N_STEP; s++) begin
        for (int e = 0; e < N_I; e++) xv[e] = seq[s * N_I + e];
        ref_step(xv, h, c, DEPTH);
      end
      for (int o = 0; o < N_O; o++) begin
        fxv_t e;
        e = ref_dense(h, o);
        checks++;
        if (y[o] !== fx_t'(e)) begin
          failures++;
          $display("N_H=%0d DEPTH=%0d run %0d: y[%0d] = %0d expected %0d", N_H, DEPTH, run, o, y[o], e);
        end
      end
      @(posedge clk);
    end
    finished = 1'b1;
  end

endmodule
