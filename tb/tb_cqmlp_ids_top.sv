// tb_cqmlp_ids_top: end-to-end test of the whole accelerator at its default
// (full) size: layers 40-256-128-64-32-4, 2-bit weights and activations.
//
// A host model written here plays the ECU software over AXI4-Lite. It draws
// random 2-bit weights, sends random INT8 messages and computes the expected
// class scores with a plain software MLP. Hidden-layer thresholds are chosen
// per neuron at the quartiles of that neuron's accumulators over the test
// windows, so every activation level occurs. Flow:
//   1. write all 53,376 weights and 1,440 thresholds through CFG_ADDR/DATA;
//   2. send messages 1-4 and time the first result (message to interrupt);
//   3. stream the rest as fast as the accelerator accepts them, servicing
//      each interrupt (read four scores, compare, acknowledge);
//   4. clear the window and send a second, shorter segment;
//   5. clear again and send a third segment at CAN line rate, one message
//      every 22,000 cycles (9,090 frames/s at 200 MHz): every message must
//      be taken at once and answered before the next one arrives.
// Mechanisms counted, each must occur: warm-up messages that give no
// result, the host finding the input busy (back-pressure through
// Streaming FIFO_0), a layer holding two vectors (double buffer), the score
// stream stalled by an unacknowledged result, interrupts and window clear.
// Timing checks: initiation interval between results at most 2000 cycles
// (100,000 windows/s at 200 MHz) and first-result latency under 22,000
// cycles (0.11 ms at 200 MHz).
module tb_cqmlp_ids_top;
  import cqmlp_pkg::*;

  // Three message segments, each starting from an empty window: a fast
  // stream, a short one after a clear, and one at CAN line rate.
  localparam int SEG1 = 16, SEG2 = 6, SEG3 = 12;
  localparam int NMSG = SEG1 + SEG2 + SEG3;
  localparam int NWIN = (SEG1 - 3) + (SEG2 - 3) + (SEG3 - 3);
  // 9,090 frames/s (a frame every 110 us) at 200 MHz
  localparam int LINE_GAP = 22000;

  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        irq;
  int checks = 0, failures = 0;

  cqmlp_ids_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .irq);

  always #2.5 clk = ~clk;   // 200 MHz

  // ---------------- host bus functions ----------------
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    awaddr <= a; wdata <= d; awvalid <= 1; wvalid <= 1;
    do @(negedge clk); while (!(awready && wready));
    @(posedge clk);
    awvalid <= 0; wvalid <= 0;
    do @(negedge clk); while (!bvalid);
    @(posedge clk);
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    araddr <= a; arvalid <= 1;
    do @(negedge clk); while (!arready);
    @(posedge clk);
    arvalid <= 0;
    do @(negedge clk); while (!rvalid);
    d = rdata;
    @(posedge clk);
  endtask

  // ---------------- reference model ----------------
  int wts [N_LAYERS][];            // wts[l][n*MW + c]
  int thr [N_LAYERS][];            // thr[l][n*3 + k]
  logic [7:0] msgs [NMSG][MSG_BYTES];
  int act [N_LAYERS+1][NWIN][];    // act[0] = window inputs, act[l+1] = layer l outputs

  function automatic void build_reference();
    int w = 0;
    // windows: four consecutive messages within a segment, oldest first
    for (int s = 0; s < 3; s++) begin
      int base = (s == 0) ? 0 : (s == 1) ? SEG1 : SEG1 + SEG2;
      int len  = (s == 0) ? SEG1 : (s == 1) ? SEG2 : SEG3;
      for (int e = N_MSG - 1; e < len; e++) begin
        act[0][w] = new[N_IN];
        for (int m = 0; m < N_MSG; m++)
          for (int k = 0; k < MSG_BYTES; k++)
            act[0][w][m*MSG_BYTES + k] = int'($signed(msgs[base + e - (N_MSG-1) + m][k]));
        w++;
      end
    end
    for (int l = 0; l < N_LAYERS; l++) begin
      int mw = LAYER_DIM[l], mh = LAYER_DIM[l+1];
      int accs [NWIN];
      for (int v = 0; v < NWIN; v++) act[l+1][v] = new[mh];
      thr[l] = new[mh * 3];
      for (int n = 0; n < mh; n++) begin
        for (int v = 0; v < NWIN; v++) begin
          int a = 0;
          for (int c = 0; c < mw; c++) a += wts[l][n*mw + c] * act[l][v][c];
          accs[v] = a;
        end
        if (l < N_LAYERS - 1) begin
          int srt [NWIN];
          srt = accs;
          srt.sort();
          for (int k = 0; k < 3; k++) thr[l][n*3 + k] = srt[(k + 1) * NWIN / 4];
          for (int v = 0; v < NWIN; v++)
            act[l+1][v][n] = int'(accs[v] >= thr[l][n*3]) + int'(accs[v] >= thr[l][n*3+1]) +
                             int'(accs[v] >= thr[l][n*3+2]);
        end else begin
          for (int v = 0; v < NWIN; v++) act[l+1][v][n] = accs[v];
        end
      end
    end
  endfunction

  // ---------------- mechanism counters ----------------
  int n_warmup = 0, n_busy = 0, n_dbl = 0, n_res_stall = 0, n_irq = 0, n_clear = 0;
  int n_fifo_used = 0, n_line = 0;
  logic irq_q = 0;
  always @(posedge clk) if (rst_n) begin
    irq_q <= irq;
    if (irq && !irq_q) n_irq++;
    if (dut.u_mva0.full == 2'b11 || dut.u_mva1.full == 2'b11) n_dbl++;
    if (dut.res_valid && !dut.res_ready) n_res_stall++;
    if (dut.win_clear) n_clear++;
    if (dut.f_count > 1) n_fifo_used++;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int res_idx = 0;
  int done_cyc[$];

  task automatic service_result();
    logic [31:0] d;
    for (int c = 0; c < N_CLASSES; c++) begin
      axi_read(REG_RES0 + 8'(4*c), d);
      check($signed(d) == act[N_LAYERS][res_idx][c],
            $sformatf("window %0d class %0d score %0d expected %0d", res_idx, c, $signed(d),
                      act[N_LAYERS][res_idx][c]));
    end
    res_idx++;
    axi_write(REG_STATUS, 32'h1);
  endtask

  task automatic send_msg(int i);
    axi_write(REG_MSG0, {msgs[i][3], msgs[i][2], msgs[i][1], msgs[i][0]});
    axi_write(REG_MSG1, {msgs[i][7], msgs[i][6], msgs[i][5], msgs[i][4]});
    axi_write(REG_MSG2, {16'h0, msgs[i][9], msgs[i][8]});
  endtask

  // Host loop: send messages first..last; service results while waiting.
  task automatic run_segment(int first, int last, int seg_start);
    logic [31:0] st;
    int i = first;
    while (i <= last) begin
      if (irq) begin
        done_cyc.push_back(cyc);
        service_result();
      end else begin
        axi_read(REG_STATUS, st);
        if (st[1]) begin
          if (i - seg_start < N_MSG - 1) n_warmup++;
          send_msg(i);
          i++;
        end else begin
          n_busy++;
        end
      end
    end
  endtask

  initial begin
    int t0, lat;
    logic [31:0] st;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; arvalid = 0; wdata = 0; wstrb = 4'hF;
    bready = 1; rready = 1;
    for (int l = 0; l < N_LAYERS; l++) begin
      wts[l] = new[LAYER_DIM[l] * LAYER_DIM[l+1]];
      foreach (wts[l][i]) wts[l][i] = int'($urandom_range(0, 3)) - 2;
    end
    foreach (msgs[i, k]) msgs[i][k] = 8'($urandom);
    build_reference();
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. parameters
    for (int l = 0; l < N_LAYERS; l++) begin
      automatic int mw = LAYER_DIM[l];
      automatic int mh = LAYER_DIM[l+1];
      for (int n = 0; n < mh; n++) begin
        for (int c = 0; c < mw; c++) begin
          axi_write(REG_CFG_ADDR, {4'h0, 4'(l), 3'b0, 1'b0, 2'b0, 9'(n), 9'(c)});
          axi_write(REG_CFG_DATA, 32'(wts[l][n*mw + c]));
        end
        if (l < N_LAYERS - 1)
          for (int k = 0; k < 3; k++) begin
            axi_write(REG_CFG_ADDR, {4'h0, 4'(l), 3'b0, 1'b1, 2'b0, 9'(n), 9'(k)});
            axi_write(REG_CFG_DATA, 32'(thr[l][n*3 + k]));
          end
      end
    end
    $display("configuration written at cycle %0d", cyc);
    axi_write(REG_CTRL, 32'h1);            // interrupt enable

    // 2. first window and its latency
    for (int i = 0; i < N_MSG; i++) begin
      if (i < N_MSG - 1) n_warmup++;
      send_msg(i);
    end
    t0 = cyc;
    while (!irq) @(posedge clk);
    lat = cyc - t0;
    $display("first result %0d cycles after the fourth message", lat);
    check(lat < 22000, "latency below 0.11 ms at 200 MHz");
    done_cyc.push_back(cyc);
    service_result();

    // 3. stream the rest of segment 1
    run_segment(N_MSG, SEG1 - 1, 0);
    // leave one result unread for a while: the score stream must stall
    repeat (3000) @(posedge clk);
    while (res_idx < SEG1 - 3) begin
      if (irq) begin done_cyc.push_back(cyc); service_result(); end
      else @(posedge clk);
    end

    // 4. clear the window, second segment
    axi_write(REG_CTRL, 32'h3);
    axi_read(REG_STATUS, st);
    check(st[6:4] == 0, "window empty after clear");
    run_segment(SEG1, SEG1 + SEG2 - 1, SEG1);
    while (res_idx < (SEG1 - 3) + (SEG2 - 3)) begin
      if (irq) begin done_cyc.push_back(cyc); service_result(); end
      else @(posedge clk);
    end

    // 5. line rate: one message every LINE_GAP cycles; the accelerator must
    //    take every message at once and answer before the next one arrives
    axi_write(REG_CTRL, 32'h3);
    for (int i = SEG1 + SEG2; i < NMSG; i++) begin
      automatic int t_msg = cyc;
      axi_read(REG_STATUS, st);
      check(st[1], "input ready at line rate");
      check(res_idx == (SEG1 - 3) + (SEG2 - 3) + ((i - SEG1 - SEG2 >= N_MSG) ? i - SEG1 - SEG2 - 3 : 0),
            "previous window answered before the next message");
      if (i - SEG1 - SEG2 < N_MSG - 1) n_warmup++;
      send_msg(i);
      while (cyc - t_msg < LINE_GAP) begin
        if (irq) begin
          done_cyc.push_back(cyc);
          service_result();
          n_line++;
        end else @(posedge clk);
      end
    end
    axi_read(REG_COUNT, st);
    check(st == 32'(NWIN), "result count");

    // initiation interval while streaming (results 3..SEG1-4 of segment 1)
    begin
      automatic int worst = 0;
      for (int r = 3; r < SEG1 - 4; r++)
        if (done_cyc[r] - done_cyc[r-1] > worst) worst = done_cyc[r] - done_cyc[r-1];
      $display("worst streaming interval %0d cycles", worst);
      check(worst <= 2000, "interval meets 100000 windows/s at 200 MHz");
      check(worst >= 1280, "interval not below the MatrixVectorActivation_0 fold");
    end

    $display("mechanisms: warmup=%0d busy=%0d double_buffer=%0d score_stall=%0d irq=%0d clear=%0d fifo=%0d line_rate=%0d",
             n_warmup, n_busy, n_dbl, n_res_stall, n_irq, n_clear, n_fifo_used, n_line);
    check(n_warmup == 3 * (N_MSG - 1), "warm-up messages");
    check(n_line == SEG3 - 3, "line-rate windows answered");
    check(n_busy > 0, "input back-pressure seen by host");
    check(n_dbl > 0, "double-buffered layer input");
    check(n_res_stall > 0, "score stream stalled by unread result");
    check(n_irq == NWIN, "one interrupt per window");
    check(n_clear == 2, "window clear");
    check(n_fifo_used > 0, "Streaming FIFO_0 holding more than one beat");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
