// tb_xh_mem -- self-checking testbench of the [x_t, h_{t-1}] memory. Checks
// that h reads return 0 after `clear`, that h writes go to the spare bank and
// only become visible after `swap`, that x_load replaces the x part, and both
// read ports, against a model of the two banks.
module tb_xh_mem;
  import lstm_pkg::*;

  localparam int N_I = 2, N_H = 5, N = N_I + N_H;
  logic       clk = 1'b0, rst_n = 1'b0, clear = 1'b0, swap = 1'b0, x_load = 1'b0;
  fx_t        x_in [N_I];
  logic       h_we = 1'b0, rd_en = 1'b0, ext_en = 1'b0;
  logic [2:0] h_addr = '0, rd_addr = '0, ext_addr = '0;
  fx_t        h_data = '0, rd_data, ext_data;
  int         checks = 0, failures = 0;

  fx_t m_x [N_I];
  fx_t m_h [2][N_H];
  bit  m_cur = 0, m_zero = 1;

  always #5 clk = ~clk;

  xh_mem #(.N_I(N_I), .N_H(N_H)) dut (.clk, .rst_n, .clear, .swap, .x_load, .x_in,
    .h_we, .h_addr, .h_data, .rd_en, .rd_addr, .rd_data, .ext_en, .ext_addr, .ext_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t model_rd(input int a);
    if (a < N_I) return m_x[a];
    if (m_zero) return '0;
    return m_h[m_cur][a - N_I];
  endfunction

  initial begin
    int nz = 0;
    foreach (x_in[e]) x_in[e] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    x_load <= 1'b1;
    @(posedge clk);
    #1;
    x_load <= 1'b0;
    foreach (m_x[e]) m_x[e] = '0;
    // fill both h banks so that every later read has a known value
    for (int b = 0; b < 2; b++) begin
      for (int a = 0; a < N_H; a++) begin
        h_we <= 1'b1; h_addr <= 3'(a); h_data <= fx_t'($urandom); swap <= (a == N_H - 1);
        @(posedge clk);
        #1;
        m_h[!m_cur][a] = h_data;
      end
      m_cur = !m_cur;
    end
    h_we <= 1'b0; swap <= 1'b0; clear <= 1'b1;
    @(posedge clk);
    #1;
    clear <= 1'b0;
    for (int t = 0; t < 3000; t++) begin
      int op, ra, ea;
      op = $urandom % 16;
      ra = $urandom % N;
      ea = $urandom % N_H;
      clear <= (op == 0); swap <= (op == 1); x_load <= (op == 2); h_we <= (op >= 3 && op < 9);
      h_addr <= 3'($urandom % N_H); h_data <= fx_t'($urandom);
      foreach (x_in[e]) x_in[e] = fx_t'($urandom);
      rd_en <= 1'b1; rd_addr <= 3'(ra); ext_en <= 1'b1; ext_addr <= 3'(ea);
      @(posedge clk);
      #1;
      checks += 2;
      if (rd_data !== model_rd(ra)) begin
        failures++; $display("t=%0d rd[%0d] = %0d expected %0d", t, ra, rd_data, model_rd(ra));
      end
      if (ext_data !== (m_zero ? fx_t'(0) : m_h[m_cur][ea])) begin
        failures++; $display("t=%0d ext[%0d] = %0d", t, ea, ext_data);
      end
      if (rd_data != 0) nz++;
      // update the model with the operation of that edge
      if (h_we) m_h[!m_cur][h_addr] = h_data;
      if (x_load) foreach (m_x[e]) m_x[e] = x_in[e];
      if (swap) begin m_cur = !m_cur; m_zero = 0; end
      if (clear) m_zero = 1;
    end
    checks++;
    if (nz < 100) begin failures++; $display("reads mostly zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
