// tb_lstm_model_sizes -- end-to-end runs of the accelerator in the other
// configurations the design is meant for: the traffic model with activation
// tables of depth 64 and 128 (the shallower tables of the depth study), and
// the smallest cell the schedule supports (hidden size 3) with two input
// features, four time steps and two outputs, and with one input feature,
// where the 8-cycle tail exactly fills a row slot. Each configuration is checked
// bit-exactly against the reference, including its latency.
module tb_lstm_model_sizes;

  logic clk = 1'b0, rst_n = 1'b0;
  int   c [4], f [4];
  logic fin [4];
  int   checks, failures;

  always #5 clk = ~clk;

  tb_model_runner #(.DEPTH(64))  u_d64  (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  tb_model_runner #(.DEPTH(128)) u_d128 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  tb_model_runner #(.N_I(2), .N_H(3), .N_STEP(4), .N_O(2), .RUNS(20)) u_small (
    .clk, .rst_n, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  // N_I + N_H = 4: the 8-cycle tail fills its slot exactly
  tb_model_runner #(.N_I(1), .N_H(3), .N_STEP(6), .N_O(1), .RUNS(20)) u_tight (
    .clk, .rst_n, .checks(c[3]), .failures(f[3]), .finished(fin[3]));

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    checks   = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("depth 64: %0d checks, depth 128: %0d checks, hidden size 3: %0d + %0d checks", c[0], c[1], c[2], c[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
