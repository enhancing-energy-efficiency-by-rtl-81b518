// lstm_model -- top level of the LSTM inference accelerator: an LSTM layer
// (one optimised LSTM cell run over N_STEP time steps) followed by a dense
// layer, predicting the next sample x'_{t+1} of a time series from the last
// N_STEP samples. Defaults are the evaluated traffic-speed model: one input
// feature, hidden size 20, 6 time steps, one output, Q8.8 data, activation
// tables of depth 256.
//
// Host interface (this design's choice; the paper does not describe the link
// to the host microcontroller): write the N_STEP*N_I input samples with
// x_we / x_addr / x_data (address = step * N_I + feature, Q8.8), pulse
// `start`, wait for `done`, read y[0..N_O-1]. `busy` is high in between.
//
// Timing: the LSTM layer needs n_ll = N_STEP * 2*(N_I+N_H)*(N_H+1) cycles
// and the dense layer n_dense = 2*N_H*N_O, the paper's timing model
// (5292 + 40 = 5332 cycles at the defaults). `done` pulses n_ll + n_dense + 2
// cycles after the `start` cycle; the two extra cycles are the hand-over
// into the dense layer and its output register.
module lstm_model
  import lstm_pkg::*;
#(
  parameter int N_I    = 1,
  parameter int N_H    = 20,
  parameter int N_STEP = 6,
  parameter int N_O    = 1,
  parameter int DEPTH  = LUT_DEPTH,
  localparam int XAW   = (N_STEP * N_I > 1) ? $clog2(N_STEP * N_I) : 1,
  localparam int HAW   = (N_H > 1) ? $clog2(N_H) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           x_we,
  input  logic [XAW-1:0] x_addr,
  input  fx_t            x_data,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output fx_t            y [N_O]
);

  logic           layer_busy, layer_done, dense_busy;
  logic           h_en;
  logic [HAW-1:0] h_addr;
  fx_t            h_data;

  lstm_layer #(.N_I(N_I), .N_H(N_H), .N_STEP(N_STEP), .DEPTH(DEPTH)) u_layer (
    .clk, .rst_n, .x_we, .x_addr, .x_data,
    .start(start && !busy), .busy(layer_busy), .done(layer_done),
    .ext_en(h_en), .ext_addr(h_addr), .ext_data(h_data)
  );

  dense_layer #(.N_F(N_H), .N_O(N_O)) u_dense (
    .clk, .rst_n, .start(layer_done), .busy(dense_busy), .done,
    .h_en, .h_addr, .h_data, .y
  );

  assign busy = layer_busy || dense_busy;

endmodule
