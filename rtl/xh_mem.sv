// xh_mem -- the shared operand memory [x_t, h_{t-1}] of the LSTM cell.
//
// ALU1..ALU4 all need the same operand vector v = [x_t, h_{t-1}] (N_I + N_H
// words, element k = 0..N_I-1 is x_t[k], element N_I + j is h_{t-1}[j]), so it
// is kept in one memory whose read port is broadcast to the four ALUs over a
// single bus.
//
// Double buffering (this design's choice): while the rows of step t are
// computed, h_{t-1} must stay readable although h_t[n] is already being
// produced. The h part therefore has two banks: reads use bank `cur`, writes
// of h_t go to the other bank, and `swap` (at the end of a recursion) makes
// the freshly written bank current. `clear` marks the h part as all zero
// (h_0 = 0) without touching the array: until the next `swap` reads of h
// return 0.
//
// Ports: x_load writes all N_I input words at once; h_we writes h_t[h_addr];
// the read port (rd_en, rd_addr -> rd_data) serves the ALUs, and a second
// read port (ext_addr -> ext_data) lets the dense layer read the current h.
// Both reads are synchronous: data valid the cycle after the address.
module xh_mem
  import lstm_pkg::*;
#(
  parameter int N_I = 1,
  parameter int N_H = 20,
  localparam int N   = N_I + N_H,
  localparam int AW  = $clog2(N),
  localparam int HAW = (N_H > 1) ? $clog2(N_H) : 1,
  localparam int XIW = (N_I > 1) ? $clog2(N_I) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           swap,
  input  logic           x_load,
  input  fx_t            x_in [N_I],
  input  logic           h_we,
  input  logic [HAW-1:0] h_addr,
  input  fx_t            h_data,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output fx_t            rd_data,
  input  logic           ext_en,
  input  logic [HAW-1:0] ext_addr,
  output fx_t            ext_data
);

  fx_t  x_q [N_I];
  fx_t  h_bank [2][N_H];
  logic cur;
  logic h_zero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur    <= 1'b0;
      h_zero <= 1'b1;
    end else begin
      if (swap) begin
        cur    <= ~cur;
        h_zero <= 1'b0;
      end
      if (clear) h_zero <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (x_load) x_q <= x_in;
    if (h_we)   h_bank[~cur][h_addr] <= h_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      if (int'(rd_addr) < N_I)  rd_data <= x_q[XIW'(rd_addr)];
      else if (h_zero)          rd_data <= '0;
      else                      rd_data <= h_bank[cur][HAW'(int'(rd_addr) - N_I)];
    end
    if (ext_en) ext_data <= h_zero ? '0 : h_bank[cur][ext_addr];
  end

endmodule
