// lstm_cell -- one LSTM cell with four parallel gate ALUs (Eq. 3.1-3.6):
//     f_t = sigmoid(W_f [x_t, h_{t-1}] + b_f)      i_t = sigmoid(W_i [..] + b_i)
//     o_t = sigmoid(W_o [x_t, h_{t-1}] + b_o)      g_t = tanh(W_g [..] + b_g)
//     C_t = f_t * C_{t-1} + i_t * g_t               h_t = o_t * tanh(C_t)
//
// Structure (following the paper's architecture diagram):
//   * xh_mem holds [x_t, h_{t-1}]; its one read port feeds all four ALUs.
//   * ALU1..ALU4 (lstm_mac_alu) compute nact_f[n], nact_i[n], nact_o[n],
//     nact_g[n] for one row n at a time, each with its own weight and bias
//     ROM (param_rom).
//   * lstm_act_unit holds the single sigmoid and tanh tables shared through
//     the S1 / S2 multiplexers.
//   * ALU5 (lstm_alu5) forms C_t[n] and h_t[n]; C_t[n] goes back into c_mem,
//     h_t[n] into the spare bank of xh_mem.
//   * lstm_cell_ctrl sequences everything; element n's activations and
//     C/h update overlap with the MACs of row n+1.
//
// Interface: `clear` resets the state to C_0 = h_0 = 0. `start` with the N_I
// input words on `x_in` runs one recursion; it is accepted when the cell is
// idle or in the last cycle of the previous recursion (`accept`), and `done`
// pulses in the recursion's last cycle, 2*(N_I+N_H)*(N_H+1) cycles after the
// cycle following `accept`. After `done` the new h_t can be read through the
// ext_* port (synchronous read) while the cell is idle.
module lstm_cell
  import lstm_pkg::*;
#(
  parameter int N_I   = 1,
  parameter int N_H   = 20,
  parameter int DEPTH = LUT_DEPTH,
  localparam int N    = N_I + N_H,
  localparam int AW   = $clog2(N),
  localparam int HAW  = (N_H > 1) ? $clog2(N_H) : 1,
  localparam int WAW  = $clog2(N_H * N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           start,
  input  fx_t            x_in [N_I],
  output logic           accept,
  output logic           busy,
  output logic           done,
  input  logic           ext_en,
  input  logic [HAW-1:0] ext_addr,
  output fx_t            ext_data
);

  // control
  logic           swap, rd_en, mac_en, mac_first, mac_last;
  logic [AW-1:0]  rd_addr;
  logic [WAW-1:0] w_addr;
  logic [HAW-1:0] b_addr, tail_idx;
  logic           tail_active, s1_en, s2_en, c_rd_en, alu5_valid;
  s1_sel_e        s1;
  s2_sel_e        s2;
  s3_sel_e        s3;

  // datapath
  fx_t  xh_bus;
  fx_t  w [4];
  fx_t  b [4];
  fx_t  nact [4];
  logic nact_valid [4];
  logic nact_sat [4];
  fx_t  f_t, i_t, o_t, g_t, tanh_c, c_prev, c_t, h_t;
  logic c_valid, h_valid, sig_clamped, tanh_clamped;

  lstm_cell_ctrl #(.N_I(N_I), .N_H(N_H)) u_ctrl (
    .clk, .rst_n, .start, .accept, .busy, .done, .swap,
    .rd_en, .rd_addr, .w_addr, .b_addr, .mac_en, .mac_first, .mac_last,
    .tail_idx, .tail_active, .s1_en, .s1, .s2_en, .s2, .c_rd_en, .alu5_valid, .s3
  );

  xh_mem #(.N_I(N_I), .N_H(N_H)) u_xh (
    .clk, .rst_n, .clear, .swap,
    .x_load(accept), .x_in,
    .h_we(h_valid), .h_addr(tail_idx), .h_data(h_t),
    .rd_en, .rd_addr, .rd_data(xh_bus),
    .ext_en, .ext_addr, .ext_data
  );

  // ALU1 = f, ALU2 = i, ALU3 = o, ALU4 = g (numbering of the architecture diagram)
  localparam int unsigned W_ID [4] = '{PID_WF, PID_WI, PID_WO, PID_WG};
  localparam int unsigned B_ID [4] = '{PID_BF, PID_BI, PID_BO, PID_BG};

  for (genvar a = 0; a < 4; a++) begin : g_alu
    param_rom #(.ID(W_ID[a]), .DEPTH(N_H * N)) u_w (
      .clk, .en(rd_en), .addr(w_addr), .data(w[a])
    );
    param_rom #(.ID(B_ID[a]), .DEPTH(N_H)) u_b (
      .clk, .en(rd_en), .addr(b_addr), .data(b[a])
    );
    lstm_mac_alu u_alu (
      .clk, .rst_n, .mac_en, .first(mac_first), .last(mac_last),
      .a(xh_bus), .w(w[a]), .bias(b[a]),
      .y(nact[a]), .y_valid(nact_valid[a]), .y_sat(nact_sat[a])
    );
  end

  lstm_act_unit #(.DEPTH(DEPTH)) u_act (
    .clk, .rst_n,
    .nact_f(nact[0]), .nact_i(nact[1]), .nact_o(nact[2]), .nact_g(nact[3]),
    .c_t,
    .s1_en, .s1, .s2_en, .s2,
    .f_t, .i_t, .o_t, .g_t, .tanh_c,
    .sig_clamped, .tanh_clamped
  );

  c_mem #(.N_H(N_H)) u_c (
    .clk, .rst_n, .clear,
    .rd_en(c_rd_en), .rd_addr(tail_idx), .rd_data(c_prev),
    .we(c_valid), .wr_addr(tail_idx), .wr_data(c_t)
  );

  lstm_alu5 u_alu5 (
    .clk, .rst_n, .valid(alu5_valid), .s3,
    .f(f_t), .i(i_t), .g(g_t), .o(o_t), .c_prev, .tanh_c,
    .c_t, .c_valid, .h_t, .h_valid
  );

endmodule
