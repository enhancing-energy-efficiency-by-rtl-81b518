// lstm_cell_ctrl -- the cell control state machine of the LSTM cell.
//
// It produces every address and every select signal (S1, S2, S3) of the
// cell. One recursion (one time step) is divided into N_H + 1 "row slots" of
// 2 * (N_I + N_H) cycles each:
//
//   * In slot n < N_H, ALU1..ALU4 compute row n of their gate's matrix-vector
//     product: for k = 0 .. N_I+N_H-1, cycle 2k reads element k of
//     [x_t, h_{t-1}] and the four weights of row n, cycle 2k+1 accumulates
//     (two cycles per ALU step).
//   * In slot n >= 1, at the same time, the finished row n-1 is turned into
//     C_t[n-1] and h_t[n-1] (the "tail"), overlapping with the MACs of row n:
//       tc 0: S1 = f into sigmoid, S2 = g into tanh, read C_{t-1}[n-1]
//       tc 1: S1 = i             tc 2: S1 = o
//       tc 3: ALU5 with S3 = C  (C_t = f*C_{t-1} + i*g)
//       tc 4: C_t written back; S2 = C into tanh
//       tc 6: ALU5 with S3 = h  (h_t = o*tanh(C_t))
//       tc 7: h_t written into the other h bank
//   * Slot N_H holds only the tail of the last row.
// A recursion therefore takes exactly 2 * (N_I + N_H) * (N_H + 1) cycles, the
// LSTM-cell term of the paper's timing model. The tail needs 8 cycles, so a
// slot must be at least that long: N_I + N_H >= 4 (hidden size down to 3 for
// one input), which matches the smallest hidden size the paper names.
// The slot schedule and tail order are this design's; the paper gives the
// row-wise pipelining, the shared tables and the select names.
//
// Handshake: `start` is accepted when the controller is idle or in the last
// cycle of a recursion (`accept` pulses then), so recursions can follow each
// other without a gap. `done` and `swap` pulse in the last cycle of a
// recursion.
module lstm_cell_ctrl
  import lstm_pkg::*;
#(
  parameter int N_I = 1,
  parameter int N_H = 20,
  localparam int N   = N_I + N_H,
  localparam int AW  = $clog2(N),
  localparam int HAW = (N_H > 1) ? $clog2(N_H) : 1,
  localparam int WAW = $clog2(N_H * N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           accept,
  output logic           busy,
  output logic           done,
  output logic           swap,
  // operand and parameter addressing (ALU1..ALU4)
  output logic           rd_en,
  output logic [AW-1:0]  rd_addr,
  output logic [WAW-1:0] w_addr,
  output logic [HAW-1:0] b_addr,
  output logic           mac_en,
  output logic           mac_first,
  output logic           mac_last,
  // tail (activation, C_t, h_t)
  output logic [HAW-1:0] tail_idx,
  output logic           tail_active,
  output logic           s1_en,
  output s1_sel_e        s1,
  output logic           s2_en,
  output s2_sel_e        s2,
  output logic           c_rd_en,
  output logic           alu5_valid,
  output s3_sel_e        s3
);

  localparam int SLOT_LEN = 2 * N;
  localparam int CW = $clog2(SLOT_LEN);
  localparam int SW = $clog2(N_H + 1);

  logic          running;
  logic [SW-1:0] slot;
  logic [CW-1:0] cyc;
  logic          last_cycle;
  logic [AW-1:0] k;

  assign last_cycle = running && (int'(slot) == N_H) && (int'(cyc) == SLOT_LEN - 1);
  assign accept     = start && (!running || last_cycle);
  assign busy       = running;
  assign done       = last_cycle;
  assign swap       = last_cycle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      slot    <= '0;
      cyc     <= '0;
    end else if (accept) begin
      running <= 1'b1;
      slot    <= '0;
      cyc     <= '0;
    end else if (last_cycle) begin
      running <= 1'b0;
    end else if (running) begin
      if (int'(cyc) == SLOT_LEN - 1) begin
        cyc  <= '0;
        slot <= slot + 1'b1;
      end else begin
        cyc <= cyc + 1'b1;
      end
    end
  end

  always_comb begin
    logic mac_slot;
    k         = AW'(cyc >> 1);
    mac_slot  = running && (int'(slot) < N_H);
    rd_en     = mac_slot && !cyc[0];
    rd_addr   = k;
    w_addr    = WAW'(int'(slot) * N + int'(k));
    b_addr    = HAW'(slot);
    mac_en    = mac_slot && cyc[0];
    mac_first = (k == '0);
    mac_last  = (int'(k) == N - 1);

    tail_active = running && (slot != '0);
    tail_idx    = HAW'(slot - 1'b1);
    s1_en       = 1'b0;
    s1          = S1_F;
    s2_en       = 1'b0;
    s2          = S2_G;
    c_rd_en     = 1'b0;
    alu5_valid  = 1'b0;
    s3          = S3_C;
    if (tail_active) begin
      unique case (int'(cyc))
        0: begin s1_en = 1'b1; s1 = S1_F; s2_en = 1'b1; s2 = S2_G; c_rd_en = 1'b1; end
        1: begin s1_en = 1'b1; s1 = S1_I; end
        2: begin s1_en = 1'b1; s1 = S1_O; end
        3: begin alu5_valid = 1'b1; s3 = S3_C; end
        4: begin s2_en = 1'b1; s2 = S2_C; end
        6: begin alu5_valid = 1'b1; s3 = S3_H; end
        default: ;
      endcase
    end
  end

  initial begin
    assert (SLOT_LEN >= 8)
      else $error("lstm_cell_ctrl: N_I + N_H must be at least 4 for the 8-cycle tail");
  end

  // A tail strobe never happens outside a recursion.
  assert property (@(posedge clk) disable iff (!rst_n) (s1_en || s2_en || alu5_valid) |-> running);

endmodule
