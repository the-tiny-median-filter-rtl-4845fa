// tb_tmf_configs: the filter at the two other sizes the design supports.
//   * distributed-memory data pipes: PIPE_DEPTH = 32, so N + 5 <= 32
//     (N up to 27, enough for a 5x5 window);
//   * 10-bit data: DATA_W = 10, five stages instead of four.
// Each instance is driven and checked by a tmf_run_check; the first run of
// each uses the largest N, the next two find the maximum and the minimum.
module tb_tmf_configs;
  logic clk = 0;
  logic done_a, done_b;
  int checks_a, failures_a, checks_b, failures_b;
  int checks, failures;

  always #5 clk = ~clk;

  tmf_run_check #(.DATA_W(8),  .PIPE_DEPTH(32),  .NMAX(27),  .RUNS(30)) u_mlab (
    .clk(clk), .done(done_a), .checks(checks_a), .failures(failures_a));
  tmf_run_check #(.DATA_W(10), .PIPE_DEPTH(256), .NMAX(250), .RUNS(20)) u_w10 (
    .clk(clk), .done(done_b), .checks(checks_b), .failures(failures_b));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);  // let the drivers clear done first
    wait (done_a && done_b);
    checks = checks_a + checks_b;
    failures = failures_a + failures_b;
    if (checks_a == 0 || checks_b == 0) failures++;
    $display("depth 32: %0d checks, 10-bit: %0d checks", checks_a, checks_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
