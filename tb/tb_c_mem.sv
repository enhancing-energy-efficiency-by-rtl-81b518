// tb_c_mem -- self-checking testbench of the cell-state memory: random reads
// and writes against a model, with `clear` making every element read as 0
// until it is written again.
module tb_c_mem;
  import lstm_pkg::*;

  localparam int N_H = 20;
  logic       clk = 1'b0, rst_n = 1'b0, clear = 1'b0, rd_en = 1'b0, we = 1'b0;
  logic [4:0] rd_addr = '0, wr_addr = '0;
  fx_t        rd_data, wr_data = '0;
  int         checks = 0, failures = 0;
  fx_t        m [N_H];

  always #5 clk = ~clk;

  c_mem #(.N_H(N_H)) dut (.clk, .rst_n, .clear, .rd_en, .rd_addr, .rd_data, .we, .wr_addr, .wr_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nz = 0;
    foreach (m[n]) m[n] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 4000; t++) begin
      int ra;
      ra = $urandom % N_H;
      clear <= ($urandom % 50 == 0); we <= ($urandom % 2);
      wr_addr <= 5'($urandom % N_H); wr_data <= fx_t'($urandom);
      rd_en <= 1'b1; rd_addr <= 5'(ra);
      @(posedge clk);
      #1;
      checks++;
      if (rd_data !== m[ra]) begin
        failures++; $display("t=%0d C[%0d] = %0d expected %0d", t, ra, rd_data, m[ra]);
      end
      if (rd_data != 0) nz++;
      if (clear) foreach (m[n]) m[n] = '0;
      else if (we) m[wr_addr] = wr_data;
    end
    checks++;
    if (nz < 100) begin failures++; $display("reads mostly zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
