// lstm_mac_alu -- multiply-accumulate ALU (ALU1..ALU4 of the LSTM cell, and
// the single MAC of the dense layer).
//
// One instance computes one row of a matrix-vector product plus bias,
//     y = narrow( b * 2^FRAC_W + sum_k a_k * w_k ),
// i.e. one not-yet-activated gate value nact_*[n]. It holds one multiplier
// (one DSP slice). Every operand pair takes two clock cycles: in the first the
// controller addresses the operand memories (their read port is registered),
// in the second the data arrive and `mac_en` is raised, giving the paper's
// figure of two cycles per ALU step. The products are accumulated at full
// width (ACC_W bits) and narrowed only once at the end (floor shift by
// FRAC_W, then saturation to DATA_W bits); the accumulator width and the
// rounding rule are this design's choice.
//
// Interface: with mac_en high, `first` starts a new row (the accumulator is
// seeded with the bias), `last` ends it. One cycle after the `last` MAC,
// `y` holds the row result and `y_valid` pulses for one cycle; `y` then stays
// unchanged until the next row ends, so a consumer may read it during the
// whole of the next row. `y_sat` tells whether the result was saturated.
module lstm_mac_alu
  import lstm_pkg::*;
#(
  parameter int ACC_W = 2 * DATA_W + 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic mac_en,
  input  logic first,
  input  logic last,
  input  fx_t  a,       // shared operand ([x_t, h_{t-1}] bus or h_t)
  input  fx_t  w,       // weight from this ALU's own ROM
  input  fx_t  bias,    // bias from this ALU's own ROM
  output fx_t  y,
  output logic y_valid,
  output logic y_sat
);

  logic signed [ACC_W-1:0]    acc;
  logic signed [ACC_W-1:0]    acc_next;
  logic signed [2*DATA_W-1:0] prod;

  always_comb begin
    prod     = a * w;
    acc_next = (first ? (ACC_W'(bias) <<< FRAC_W) : acc) + ACC_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      y       <= '0;
      y_valid <= 1'b0;
      y_sat   <= 1'b0;
    end else begin
      y_valid <= mac_en && last;
      if (mac_en) begin
        acc <= acc_next;
        if (last) begin
          y     <= fx_narrow(64'(acc_next));
          y_sat <= fx_overflows(64'(acc_next));
        end
      end
    end
  end

endmodule
