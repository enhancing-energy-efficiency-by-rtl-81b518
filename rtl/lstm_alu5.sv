// lstm_alu5 -- element-wise unit of the LSTM cell (ALU5).
//
// Computes, for one hidden index n at a time,
//     S3 = S3_C :  C_t[n] = f_t[n] * C_{t-1}[n] + i_t[n] * g_t[n]
//     S3 = S3_H :  h_t[n] = o_t[n] * tanh(C_t[n])
// As in the paper, ALU5 is built from three multipliers (three DSP slices),
// one per product, so each operation completes in a single cycle no matter
// how small the hidden size is. The S3 select decides which result register
// (C_t[n] or h_t[n]) is loaded, which is the output multiplexer of the
// architecture diagram. Narrowing follows lstm_pkg::fx_narrow (floor shift
// and saturation), applied once to the sum of the two C products.
//
// Timing: inputs are sampled in a cycle with `valid` high; the selected
// result register and its one-cycle `c_valid` / `h_valid` strobe appear in the
// next cycle and the register keeps its value until overwritten.
module lstm_alu5
  import lstm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    valid,
  input  s3_sel_e s3,
  input  fx_t     f,
  input  fx_t     i,
  input  fx_t     g,
  input  fx_t     o,
  input  fx_t     c_prev,
  input  fx_t     tanh_c,
  output fx_t     c_t,
  output logic    c_valid,
  output fx_t     h_t,
  output logic    h_valid
);

  logic signed [2*DATA_W-1:0] m_fc, m_ig, m_oh;
  logic signed [2*DATA_W:0]   c_sum;

  always_comb begin
    m_fc  = f * c_prev;
    m_ig  = i * g;
    m_oh  = o * tanh_c;
    c_sum = (2*DATA_W+1)'(m_fc) + (2*DATA_W+1)'(m_ig);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_t     <= '0;
      h_t     <= '0;
      c_valid <= 1'b0;
      h_valid <= 1'b0;
    end else begin
      c_valid <= valid && (s3 == S3_C);
      h_valid <= valid && (s3 == S3_H);
      if (valid && s3 == S3_C) c_t <= fx_narrow(64'(c_sum));
      if (valid && s3 == S3_H) h_t <= fx_narrow(64'(m_oh));
    end
  end

endmodule
