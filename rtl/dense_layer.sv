// dense_layer -- fully connected output layer, y = W * h + b, with N_F inputs
// and N_O outputs, computed on a single multiply-accumulate unit (one DSP).
//
// For each output o the layer reads h[k] (k = 0 .. N_F-1) from the LSTM
// cell's h memory through a synchronous read port and the weight
// W[o][k] from its ROM (address o*N_F + k), and accumulates in the shared
// lstm_mac_alu: as in the LSTM cell, every product takes two cycles (read,
// then multiply-accumulate), so the layer needs 2 * N_F * N_O cycles, the
// dense term of the paper's timing model. The paper takes this layer from an
// existing tool and states only its single-DSP structure and timing; the
// sequencing here is this design's own.
//
// Interface: `start` (while idle) begins; the MAC cycles are the 2*N_F*N_O
// cycles after the `start` cycle, and `done` pulses two cycles after the last
// of them, when all y[o] are stable. y[o] keeps its value until the next run.
module dense_layer
  import lstm_pkg::*;
#(
  parameter int N_F = 20,
  parameter int N_O = 1,
  localparam int FAW = (N_F > 1) ? $clog2(N_F) : 1,
  localparam int OW  = (N_O > 1) ? $clog2(N_O) : 1,
  localparam int WAW = (N_F * N_O > 1) ? $clog2(N_F * N_O) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic           h_en,
  output logic [FAW-1:0] h_addr,
  input  fx_t            h_data,
  output fx_t            y [N_O]
);

  logic           running, phase, mac_en, last_k, last_o, done_q;
  logic [FAW-1:0] k;
  logic [OW-1:0]  o, o_out;
  fx_t            w, b, alu_y;
  logic           alu_valid, alu_sat;

  assign last_k = (int'(k) == N_F - 1);
  assign last_o = (int'(o) == N_O - 1);
  assign h_en   = running && !phase;
  assign h_addr = k;
  assign mac_en = running && phase;
  assign busy   = running || alu_valid || done_q;
  assign done   = done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      phase   <= 1'b0;
      k       <= '0;
      o       <= '0;
      o_out   <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= alu_valid && (int'(o_out) == N_O - 1);
      if (start && !busy) begin
        running <= 1'b1;
        phase   <= 1'b0;
        k       <= '0;
        o       <= '0;
      end else if (running) begin
        phase <= ~phase;
        if (phase) begin
          if (last_k) begin
            k <= '0;
            if (last_o) running <= 1'b0;
            else        o <= o + 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end
      end
      if (mac_en && last_k) o_out <= o;
    end
  end

  always_ff @(posedge clk) begin
    if (alu_valid) y[o_out] <= alu_y;
  end

  param_rom #(.ID(PID_WD), .DEPTH(N_F * N_O)) u_w (
    .clk, .en(h_en), .addr(WAW'(int'(o) * N_F + int'(k))), .data(w)
  );
  param_rom #(.ID(PID_BD), .DEPTH(N_O)) u_b (
    .clk, .en(h_en), .addr(o), .data(b)
  );

  lstm_mac_alu u_alu (
    .clk, .rst_n, .mac_en, .first(k == '0), .last(last_k),
    .a(h_data), .w, .bias(b),
    .y(alu_y), .y_valid(alu_valid), .y_sat(alu_sat)
  );

endmodule
