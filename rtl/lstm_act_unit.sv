// lstm_act_unit -- activation path of the LSTM cell: the S1 and S2
// multiplexers, the shared sigmoid and tanh lookup tables, the demultiplexers
// behind them and the registers holding the activated values.
//
// Only one sigmoid table and one tanh table exist. The cell controller feeds
// them one value per cycle:
//   S1 selects nact_f, nact_i or nact_o into the sigmoid table; the result is
//      stored in f_t[n], i_t[n] or o_t[n].
//   S2 selects nact_g or C_t[n] into the tanh table; the result is stored in
//      g_t[n] or tanh_C_t[n].
// In the architecture diagram the same select signal drives the multiplexer
// in front of a table and the one behind it. Because the tables are read
// synchronously here (block-RAM style), the select used behind a table is the
// front select delayed by one cycle; that delay is this design's own.
//
// Timing: a value selected in cycle t (with s1_en / s2_en high) is looked up
// in cycle t, leaves the table in cycle t+1 and is readable from its output
// register from cycle t+2 on. The registers keep their values until the same
// select is used again. `sig_clamped` / `tanh_clamped` report, in cycle t+1,
// that the looked-up input lay outside the table's interval.
module lstm_act_unit
  import lstm_pkg::*;
#(
  parameter int DEPTH = LUT_DEPTH
) (
  input  logic    clk,
  input  logic    rst_n,
  input  fx_t     nact_f,
  input  fx_t     nact_i,
  input  fx_t     nact_o,
  input  fx_t     nact_g,
  input  fx_t     c_t,
  input  logic    s1_en,
  input  s1_sel_e s1,
  input  logic    s2_en,
  input  s2_sel_e s2,
  output fx_t     f_t,
  output fx_t     i_t,
  output fx_t     o_t,
  output fx_t     g_t,
  output fx_t     tanh_c,
  output logic    sig_clamped,
  output logic    tanh_clamped
);

  fx_t     sig_in, sig_out, tanh_in, tanh_out;
  logic    s1_en_d, s2_en_d;
  s1_sel_e s1_d;
  s2_sel_e s2_d;
  logic    sig_clamp_q, tanh_clamp_q;

  // S1 / S2 input multiplexers.
  always_comb begin
    unique case (s1)
      S1_F:    sig_in = nact_f;
      S1_I:    sig_in = nact_i;
      default: sig_in = nact_o;
    endcase
    tanh_in = (s2 == S2_G) ? nact_g : c_t;
  end

  sigmoid_lut #(.DEPTH(DEPTH)) u_sigmoid (
    .clk(clk), .en(s1_en), .x(sig_in), .y(sig_out), .clamped(sig_clamp_q)
  );

  tanh_lut #(.DEPTH(DEPTH)) u_tanh (
    .clk(clk), .en(s2_en), .x(tanh_in), .y(tanh_out), .clamped(tanh_clamp_q)
  );

  assign sig_clamped  = s1_en_d && sig_clamp_q;
  assign tanh_clamped = s2_en_d && tanh_clamp_q;

  // Output demultiplexers into the activated-value registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_en_d <= 1'b0;
      s2_en_d <= 1'b0;
      s1_d    <= S1_F;
      s2_d    <= S2_G;
      f_t     <= '0;
      i_t     <= '0;
      o_t     <= '0;
      g_t     <= '0;
      tanh_c  <= '0;
    end else begin
      s1_en_d <= s1_en;
      s2_en_d <= s2_en;
      s1_d    <= s1;
      s2_d    <= s2;
      if (s1_en_d) begin
        unique case (s1_d)
          S1_F:    f_t <= sig_out;
          S1_I:    i_t <= sig_out;
          default: o_t <= sig_out;
        endcase
      end
      if (s2_en_d) begin
        if (s2_d == S2_G) g_t    <= tanh_out;
        else              tanh_c <= tanh_out;
      end
    end
  end

endmodule
