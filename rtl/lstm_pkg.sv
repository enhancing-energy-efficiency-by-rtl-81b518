// lstm_pkg -- types, constants and helper functions shared by the LSTM
// accelerator.
//
// Numbers are signed fixed point in the (FRAC_W, DATA_W) = (8, 16) format the
// design was evaluated with: 16 bits in total, 8 of them fractional (Q8.8).
// Changing DATA_W / FRAC_W here rescales the whole datapath.
//
// The package also defines:
//   * the select encodings of the three multiplexer groups S1, S2, S3 that
//     the cell controller drives (the names follow the architecture diagram),
//   * fx_narrow(), the one rounding/overflow rule used everywhere: a wide
//     product or sum is shifted right by FRAC_W (floor) and saturated to
//     DATA_W bits (both choices are this design's own),
//   * param_value(), which fills the weight and bias ROMs. The trained
//     parameters of the published model are not available, so the ROMs hold
//     a fixed pseudo-random set of small values (|w| < 0.25, |b| < 0.5).
//     Replacing this function with a table of trained values is the intended
//     way to load a real model; nothing else changes.
package lstm_pkg;

  localparam int DATA_W = 16;   // total width of a fixed-point word
  localparam int FRAC_W = 8;    // fractional bits

  typedef logic signed [DATA_W-1:0] fx_t;

  localparam fx_t FX_MAX = fx_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Depth of both activation lookup tables.
  localparam int LUT_DEPTH = 256;

  // S1: which pre-activation goes through the sigmoid LUT.
  typedef enum logic [1:0] {S1_F = 2'd0, S1_I = 2'd1, S1_O = 2'd2} s1_sel_e;
  // S2: which value goes through the tanh LUT.
  typedef enum logic {S2_G = 1'b0, S2_C = 1'b1} s2_sel_e;
  // S3: what ALU5 computes and where its result is stored.
  typedef enum logic {S3_C = 1'b0, S3_H = 1'b1} s3_sel_e;

  // Identifiers of the parameter ROMs (weights 0..3, biases 4..7, dense 8/9).
  localparam int unsigned PID_WF = 0, PID_WI = 1, PID_WO = 2, PID_WG = 3;
  localparam int unsigned PID_BF = 4, PID_BI = 5, PID_BO = 6, PID_BG = 7;
  localparam int unsigned PID_WD = 8, PID_BD = 9;

  // Shift right by FRAC_W (rounding towards minus infinity) and saturate.
  function automatic fx_t fx_narrow(input logic signed [63:0] v);
    logic signed [63:0] s;
    s = v >>> FRAC_W;
    if (s > 64'(FX_MAX)) return FX_MAX;
    if (s < 64'(FX_MIN)) return FX_MIN;
    return fx_t'(s);
  endfunction

  // True when fx_narrow() would saturate v.
  function automatic logic fx_overflows(input logic signed [63:0] v);
    logic signed [63:0] s;
    s = v >>> FRAC_W;
    return (s > 64'(FX_MAX)) || (s < 64'(FX_MIN));
  endfunction

  // Content of parameter ROM `id` at address `idx`: an integer hash mapped to
  // (-0.25, 0.25) for weights and (-0.5, 0.5) for biases.
  function automatic fx_t param_value(input int unsigned id, input int unsigned idx);
    logic [31:0] h;
    logic signed [7:0] b;
    h = (idx + 32'd1) * 32'h9E37_79B1 + (id + 32'd7) * 32'h85EB_CA77;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    b = h[7:0];
    if (id == PID_BF || id == PID_BI || id == PID_BO || id == PID_BG || id == PID_BD)
      return fx_t'(b);           // |b| < 128/256 = 0.5
    return fx_t'(b) >>> 1;       // |w| < 64/256 = 0.25
  endfunction

endpackage
