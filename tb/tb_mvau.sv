// tb_mvau: self-checking test of the matrix-vector activation unit in two
// configurations: a hidden layer with signed INT8 input, thresholds and
// PE = 2, and an output layer with unsigned 2-bit input, PE = 3 and raw
// accumulator output. See mvau_harness for what is checked.
module tb_mvau;
  logic clk = 0, rst_n = 0;
  logic done_a, done_b;
  int checks_a, failures_a, stalls_a, checks_b, failures_b, stalls_b;
  int checks, failures;
  always #5 clk = ~clk;

  mvau_harness #(.MW(16), .MH(8), .SIMD(4), .PE(2), .IN_W(8), .IN_SIGNED(1'b1),
                 .IN_PAR(4), .USE_ACT(1'b1), .NV(24), .THR_SPAN(600)) u_a (
    .clk, .rst_n, .done(done_a), .checks(checks_a), .failures(failures_a), .n_stalls(stalls_a));

  mvau_harness #(.MW(12), .MH(6), .SIMD(3), .PE(3), .IN_W(2), .IN_SIGNED(1'b0),
                 .IN_PAR(3), .USE_ACT(1'b0), .NV(24)) u_b (
    .clk, .rst_n, .done(done_b), .checks(checks_b), .failures(failures_b), .n_stalls(stalls_b));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (done_a && done_b);
    checks   = checks_a + checks_b + 1;
    failures = failures_a + failures_b;
    if (stalls_a == 0 || stalls_b == 0) begin
      failures++;
      $display("FAIL output stall never exercised");
    end
    $display("stalls: %0d / %0d", stalls_a, stalls_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
