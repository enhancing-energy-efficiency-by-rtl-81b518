// lstm_layer -- the LSTM layer: one lstm_cell applied recurrently to an input
// sequence of N_STEP samples (x_{t-5} .. x_t for the traffic-speed model).
//
// Only one cell exists; the "unrolled" chain of cells is executed in time.
// The layer holds the sequence in a small input buffer that the host fills
// through the x_we / x_addr / x_data port (address = step * N_I + element;
// this buffer and its port are this design's choice). On `start` it clears
// the cell state (C_0 = h_0 = 0) and starts the first recursion; each
// following recursion is started in the last cycle of the previous one, so
// the steps run back to back. `done` pulses in the last cycle of the last
// recursion, N_STEP * 2*(N_I+N_H)*(N_H+1) cycles after the cycle following
// `start`. The final hidden state h_t can then be read through the ext_*
// port.
module lstm_layer
  import lstm_pkg::*;
#(
  parameter int N_I    = 1,
  parameter int N_H    = 20,
  parameter int N_STEP = 6,
  parameter int DEPTH  = LUT_DEPTH,
  localparam int HAW   = (N_H > 1) ? $clog2(N_H) : 1,
  localparam int XAW   = (N_STEP * N_I > 1) ? $clog2(N_STEP * N_I) : 1,
  localparam int STW   = (N_STEP > 1) ? $clog2(N_STEP) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           x_we,
  input  logic [XAW-1:0] x_addr,
  input  fx_t            x_data,
  input  logic           start,
  output logic           busy,
  output logic           done,
  input  logic           ext_en,
  input  logic [HAW-1:0] ext_addr,
  output fx_t            ext_data
);

  fx_t            x_buf [N_STEP * N_I];
  fx_t            x_cur [N_I];
  logic           running;
  logic [STW-1:0] step;
  logic [STW-1:0] next_step;
  logic           cell_start, cell_accept, cell_busy, cell_done, last_step;

  assign last_step  = (int'(step) == N_STEP - 1);
  assign next_step  = running ? STW'(step + 1'b1) : '0;
  assign cell_start = (start && !running) || (running && cell_done && !last_step);
  assign busy       = running;
  assign done       = running && cell_done && last_step;

  always_comb begin
    for (int e = 0; e < N_I; e++) x_cur[e] = x_buf[int'(next_step) * N_I + e];
  end

  always_ff @(posedge clk) begin
    if (x_we) x_buf[x_addr] <= x_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      step    <= '0;
    end else begin
      if (cell_accept) step <= next_step;
      if (start && !running) running <= 1'b1;
      else if (done)         running <= 1'b0;
    end
  end

  lstm_cell #(.N_I(N_I), .N_H(N_H), .DEPTH(DEPTH)) u_cell (
    .clk, .rst_n,
    .clear(start && !running),
    .start(cell_start), .x_in(x_cur),
    .accept(cell_accept), .busy(cell_busy), .done(cell_done),
    .ext_en, .ext_addr, .ext_data
  );

  // Every recursion the layer asks for is taken at once.
  assert property (@(posedge clk) disable iff (!rst_n) cell_start |-> cell_accept);
  // The host must not rewrite the sequence while it is being processed.
  assert property (@(posedge clk) disable iff (!rst_n) x_we |-> !running);

endmodule
