// c_mem -- cell-state memory C of the LSTM cell.
//
// Holds N_H words. During the recursion for step t, element n is read as
// C_{t-1}[n] for ALU5 and, a few cycles later, overwritten with C_t[n]. Each
// element is read before it is written and no other element depends on it,
// so one copy suffices. `clear` sets the state to C_0 = 0 without touching
// the array: a valid bit per element is reset and reads of an element return
// 0 until it has been written again (this mechanism is this design's own).
//
// Timing: synchronous read (data valid the cycle after rd_en); a write is
// visible to reads from the next cycle on.
module c_mem
  import lstm_pkg::*;
#(
  parameter int N_H = 20,
  localparam int AW = (N_H > 1) ? $clog2(N_H) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fx_t           rd_data,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  fx_t           wr_data
);

  fx_t              mem [N_H];
  logic [N_H-1:0]   written;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written <= '0;
    end else if (clear) begin
      written <= '0;
    end else if (we) begin
      written[wr_addr] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= written[rd_addr] ? mem[rd_addr] : '0;
  end

endmodule
