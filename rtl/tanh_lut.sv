// tanh_lut -- shared lookup table for the tanh activation.
//
// One instance serves all tanh evaluations of the LSTM cell; the cell
// controller time-multiplexes it. The table has DEPTH entries (256 in the
// evaluated design; 64 and 128 were also studied) and approximates
// tanh(x) = (e^2x - 1) / (e^2x + 1) over the input interval [-4, 4): the
// input is divided into DEPTH equal bins, each bin stores the function value
// at its centre rounded to the fixed-point grid, and inputs outside the
// interval use the first or last bin, whose values are already within a bin
// width of the asymptotes -1 and 1. The interval, the sampling point and the
// rounding are this design's choice; the table is computed at elaboration
// from the formula, so no data file is needed.
//
// Index: idx = clamp(x >>> SHIFT, -DEPTH/2, DEPTH/2-1) + DEPTH/2 with
// SHIFT = FRAC_W + RANGE_LOG2 + 1 - log2(DEPTH), i.e. bin width 2^SHIFT LSBs.
//
// Timing: like a block RAM, the read is registered -- `y` is valid in the
// cycle after `en` and holds its value while `en` is low. `clamped` tells
// whether the last looked-up input was outside the interval.
module tanh_lut
  import lstm_pkg::*;
#(
  parameter int DEPTH      = LUT_DEPTH,
  parameter int RANGE_LOG2 = 2        // input interval is [-2^RANGE_LOG2, 2^RANGE_LOG2)
) (
  input  logic clk,
  input  logic en,
  input  fx_t  x,
  output fx_t  y,
  output logic clamped
);

  localparam int IDX_W = $clog2(DEPTH);
  localparam int SHIFT = FRAC_W + RANGE_LOG2 + 1 - IDX_W;
  localparam int HALF  = DEPTH / 2;

  typedef fx_t table_t [DEPTH];

  function automatic table_t build_table();
    table_t t;
    for (int j = 0; j < DEPTH; j++) begin
      real xr, fr;
      xr   = (real'(j - HALF) + 0.5) * (2.0 ** SHIFT) / (2.0 ** FRAC_W);
      fr   = ($exp(2.0 * xr) - 1.0) / ($exp(2.0 * xr) + 1.0);
      t[j] = fx_t'($rtoi($floor(fr * (2.0 ** FRAC_W) + 0.5)));
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  int                       q;
  logic [IDX_W-1:0]         idx;
  logic                     out_of_range;

  always_comb begin
    q            = int'(x) >>> SHIFT;
    out_of_range = (q < -HALF) || (q > HALF - 1);
    if (q < -HALF)         idx = '0;
    else if (q > HALF - 1) idx = '1;
    else                   idx = IDX_W'(q + HALF);
  end

  always_ff @(posedge clk) begin
    if (en) begin
      y       <= TABLE[idx];
      clamped <= out_of_range;
    end
  end

  initial begin
    assert (SHIFT >= 0) else $error("tanh_lut: DEPTH too large for the input interval");
  end

endmodule
