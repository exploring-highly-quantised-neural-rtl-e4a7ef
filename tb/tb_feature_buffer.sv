// tb_feature_buffer: self-checking test of the four-message sliding window.
// Sends 40 random ten-byte messages with random gaps and a randomly stalling
// consumer. A reference window (a queue of the last four messages) predicts
// every 40-byte window; the test checks that no window appears during the
// three-message warm-up, that each later message yields exactly one window
// in the right order, that the first beat follows one cycle after the
// message, and that clear restarts the warm-up.
module tb_feature_buffer;
  localparam int unsigned N_MSG = 4, MSG_BYTES = 10, LANES = 8;
  localparam int unsigned N_EL = N_MSG * MSG_BYTES, N_BEAT = N_EL / LANES;

  logic clk = 0, rst_n = 0, clear = 0;
  logic msg_valid, msg_ready, win_valid, win_ready;
  logic [MSG_BYTES*8-1:0] msg_data;
  logic [LANES*8-1:0] win_data;
  logic [2:0] fill;
  int checks = 0, failures = 0;

  feature_buffer #(.N_MSG(N_MSG), .MSG_BYTES(MSG_BYTES), .OUT_LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  logic [7:0] hist[$];        // reference: bytes of the last messages
  logic [7:0] expq[$];        // bytes expected on the window stream
  int n_windows = 0, n_beats = 0;
  // handshake of the coming rising edge, sampled while inputs are stable
  logic msg_fire;
  always @(negedge clk) msg_fire = msg_valid && msg_ready;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer + checker
  always @(posedge clk) begin
    if (rst_n && win_valid && win_ready) begin
      for (int j = 0; j < LANES; j++) begin
        checks++;
        if (expq.size() == 0 || win_data[j*8 +: 8] != expq[0]) begin
          failures++;
          $display("FAIL beat %0d lane %0d got %h exp %h", n_beats, j, win_data[j*8 +: 8],
                   (expq.size() != 0) ? expq[0] : 8'h0);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
      n_beats++;
    end
    win_ready <= ($urandom_range(0, 3) != 0);
  end

  task automatic send(bit expect_window);
    logic [MSG_BYTES*8-1:0] m;
    for (int k = 0; k < MSG_BYTES; k++) m[k*8 +: 8] = 8'($urandom);
    msg_valid <= 1; msg_data <= m;
    @(posedge clk);
    while (!msg_fire) @(posedge clk);
    msg_valid <= 0;
    for (int k = 0; k < MSG_BYTES; k++) hist.push_back(m[k*8 +: 8]);
    while (hist.size() > N_EL) void'(hist.pop_front());
    if (expect_window) foreach (hist[i]) expq.push_back(hist[i]);
    // first beat must be offered in the following cycle
    #1;
    checks++;
    if (win_valid != expect_window) begin
      failures++;
      $display("FAIL win_valid=%0d expected %0d after message", win_valid, expect_window);
    end
    repeat ($urandom_range(0, 3)) @(posedge clk);
  endtask

  initial begin
    msg_valid = 0; msg_data = '0; win_ready = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 40; i++) send(i >= N_MSG - 1);
    // clear restarts the warm-up
    while (win_valid) @(posedge clk);
    @(posedge clk);
    clear <= 1; @(posedge clk); clear <= 0;
    hist.delete();
    #1;
    checks++;
    if (fill != 0) begin failures++; $display("FAIL fill after clear %0d", fill); end
    for (int i = 0; i < 6; i++) send(i >= N_MSG - 1);
    while (win_valid || expq.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (n_beats != (37 + 3) * N_BEAT) begin
      failures++;
      $display("FAIL beats %0d expected %0d", n_beats, 40 * N_BEAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
