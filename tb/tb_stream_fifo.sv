// tb_stream_fifo: self-checking test of the streaming FIFO.
// A random producer and a random consumer (each stalls about a third of the
// time) move 3000 words; every word read is compared with a scoreboard
// queue. Also checks that the FIFO fills to DEPTH and that a written word
// reaches the output one cycle after it is written into an empty FIFO.
module tb_stream_fifo;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned DEPTH = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] q[$];
  int n_in = 0, n_out = 0;
  // handshake of the coming rising edge, sampled while inputs are stable
  logic in_fire;
  always @(negedge clk) in_fire = in_valid && in_ready;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // latency: one word into the empty FIFO
    in_valid <= 1; in_data <= 16'hBEEF;
    @(posedge clk);
    in_valid <= 0;
    #1;
    checks++;
    if (!(out_valid && out_data == 16'hBEEF)) begin failures++; $display("FAIL latency"); end
    out_ready <= 1;
    @(posedge clk);
    out_ready <= 0;
    // fill until full with consumer stopped
    for (int i = 0; i < DEPTH; i++) begin
      in_valid <= 1; in_data <= WIDTH'(i);
      @(posedge clk);
      q.push_back(WIDTH'(i));
    end
    in_valid <= 0;
    #1;
    checks++;
    if (int'(count) != DEPTH || in_ready) begin failures++; $display("FAIL full count=%0d", count); end
    // random traffic
    fork
      begin
        for (int i = 0; i < 3000; i++) begin
          in_valid <= ($urandom_range(0, 2) != 0);
          in_data  <= WIDTH'($urandom);
          @(posedge clk);
          while (!in_fire) begin
            in_valid <= 1;
            @(posedge clk);
          end
          q.push_back(in_data);
          n_in++;
          in_valid <= 0;
        end
      end
      begin
        while (n_out < 3000 + DEPTH) begin
          out_ready <= ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (q.size() == 0 || out_data != q[0]) begin
              failures++;
              $display("FAIL data %h exp %h", out_data, (q.size() != 0) ? q[0] : '0);
            end
            if (q.size() != 0) void'(q.pop_front());
            n_out++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
