// param_rom -- read-only memory for the weights or biases of one ALU.
//
// The LSTM cell keeps every static parameter on chip: each of W_f, W_i, W_o,
// W_g and b_f, b_i, b_o, b_g (and the dense layer's weights and bias) sits in
// its own small memory next to the ALU that uses it, and is filled when the
// FPGA is configured, so there is no circuit for loading parameters at run
// time. Here the content comes from lstm_pkg::param_value(ID, address), which
// is evaluated at elaboration; put the trained values there to deploy a real
// model.
//
// Layout for a weight ROM of the cell: address = n * (N_I + N_H) + k holds the
// weight of row n (hidden unit n) for element k of the [x_t, h_{t-1}] vector.
//
// Timing: synchronous read; `data` is valid the cycle after `en` and holds
// while `en` is low.
module param_rom
  import lstm_pkg::*;
#(
  parameter int unsigned ID    = 0,
  parameter int unsigned DEPTH = 420,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          en,
  input  logic [AW-1:0] addr,
  output fx_t           data
);

  typedef fx_t rom_t [DEPTH];

  function automatic rom_t build_rom();
    rom_t r;
    for (int unsigned a = 0; a < DEPTH; a++) r[a] = param_value(ID, a);
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  always_ff @(posedge clk) begin
    if (en) data <= ROM[addr];
  end

endmodule
