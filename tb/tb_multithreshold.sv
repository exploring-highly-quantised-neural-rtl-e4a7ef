// tb_multithreshold: self-checking test of the threshold activation.
// Drives random accumulators against random ascending threshold triples and
// compares the activation with a count computed here; also checks the edges
// (accumulator exactly on a threshold, below all, above all).
module tb_multithreshold;
  localparam int unsigned ACC_W = 12;
  localparam int unsigned OUT_W = 2;
  localparam int unsigned N_T   = 3;

  logic signed [ACC_W-1:0]      acc;
  logic        [N_T*ACC_W-1:0]  thr;
  logic        [OUT_W-1:0]      act;
  int checks = 0, failures = 0;

  multithreshold #(.ACC_W(ACC_W), .OUT_W(OUT_W)) dut (.acc, .thr, .act);

  function automatic int expected(int a, int t0, int t1, int t2);
    return int'(a >= t0) + int'(a >= t1) + int'(a >= t2);
  endfunction

  task automatic check(int a, int t0, int t1, int t2);
    acc = ACC_W'(a);
    thr = {ACC_W'(t2), ACC_W'(t1), ACC_W'(t0)};
    #1;
    checks++;
    if (int'(act) != expected(a, t0, t1, t2)) begin
      failures++;
      $display("FAIL acc=%0d thr=%0d,%0d,%0d act=%0d exp=%0d", a, t0, t1, t2, act,
               expected(a, t0, t1, t2));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, t2;
    check(5, 5, 10, 20);     // exactly on first threshold
    check(4, 5, 10, 20);     // just below
    check(20, 5, 10, 20);    // on last
    check(-2048, -100, 0, 100);
    check(2047, -100, 0, 100);
    check(-1, -1, -1, -1);   // all equal
    for (int i = 0; i < 2000; i++) begin
      t0 = int'($urandom_range(0, 400)) - 200;
      t1 = t0 + int'($urandom_range(0, 100));
      t2 = t1 + int'($urandom_range(0, 100));
      check(int'($urandom_range(0, 800)) - 400, t0, t1, t2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
