// tb_axil_ids_regs: self-checking test of the AXI4-Lite front end.
// An AXI4-Lite master written here sends messages, configuration writes and
// control writes and reads back registers. The test checks the ten message
// bytes handed to the feature buffer, that a message write is held while
// the buffer is busy, the cfg pulse and its fields, the window-clear pulse,
// collection of four signed scores, the interrupt (only when enabled), its
// acknowledge, the result counter and the back-pressure on the score stream.
module tb_axil_ids_regs;
  import cqmlp_pkg::*;
  localparam int unsigned RES_W = 10;

  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        irq, msg_valid, msg_ready, win_clear, res_valid, res_ready, cfg_we;
  logic [79:0] msg_data;
  logic [2:0]  win_fill;
  logic [RES_W-1:0] res_data;
  cfg_wr_t     cfg;
  int checks = 0, failures = 0;

  axil_ids_regs #(.ADDR_W(8), .N_CLS(4), .RES_W(RES_W), .MSG_B(10), .FILL_W(3)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .irq, .msg_valid, .msg_ready, .msg_data, .win_clear, .win_fill,
    .res_valid, .res_ready, .res_data, .cfg_we, .cfg);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
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

  // message capture
  logic [79:0] got_msg[$];
  int n_clear = 0;
  cfg_wr_t got_cfg[$];
  always @(posedge clk) begin
    if (rst_n && msg_valid && msg_ready) got_msg.push_back(msg_data);
    if (rst_n && win_clear) n_clear++;
    if (rst_n && cfg_we) got_cfg.push_back(cfg);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [79:0] m;
    int sc[4];
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; arvalid = 0; wdata = 0; wstrb = 4'hF;
    bready = 1; rready = 1; msg_ready = 1; res_valid = 0; res_data = 0; win_fill = 3'd2;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // --- messages ---
    for (int i = 0; i < 5; i++) begin
      for (int k = 0; k < 10; k++) m[k*8 +: 8] = 8'($urandom);
      axi_write(REG_MSG0, m[31:0]);
      axi_write(REG_MSG1, m[63:32]);
      check(got_msg.size() == 0, "no message before MSG2 write");
      if (i == 3) begin
        // buffer busy: the MSG2 write must wait
        msg_ready <= 0;
        fork
          axi_write(REG_MSG2, {16'h0, m[79:64]});
          begin
            repeat (6) @(posedge clk);
            check(got_msg.size() == 0 && !bvalid, "MSG2 write held while buffer busy");
            msg_ready <= 1;
          end
        join
      end else begin
        axi_write(REG_MSG2, {16'h0, m[79:64]});
      end
      check(got_msg.size() == 1 && got_msg[0] == m, $sformatf("message %0d bytes", i));
      got_msg.delete();
    end

    // --- configuration write ---
    axi_write(REG_CFG_ADDR, {4'h0, 4'd3, 3'b0, 1'b1, 2'b0, 9'd77, 9'd2});
    axi_write(REG_CFG_DATA, 32'hFFFF_FFF5);
    @(negedge clk);
    check(got_cfg.size() == 1, "one cfg pulse");
    if (got_cfg.size() == 1)
      check(got_cfg[0].layer == 3 && got_cfg[0].sel == CFG_THRESH && got_cfg[0].row == 77 &&
            got_cfg[0].col == 2 && got_cfg[0].data == 32'hFFFF_FFF5, "cfg fields");
    axi_read(REG_CFG_ADDR, d);
    check(d == {4'h0, 4'd3, 3'b0, 1'b1, 2'b0, 9'd77, 9'd2}, "CFG_ADDR readback");

    // --- clear pulse and status ---
    axi_write(REG_CTRL, 32'h2);
    @(negedge clk);
    check(n_clear == 1, "window clear pulse");
    axi_read(REG_STATUS, d);
    check(d[0] == 0 && d[1] == 1 && d[6:4] == 3'd2, "STATUS idle");

    // --- results, interrupt disabled then enabled ---
    for (int r = 0; r < 3; r++) begin
      if (r == 1) axi_write(REG_CTRL, 32'h1);
      for (int c = 0; c < 4; c++) sc[c] = int'($urandom_range(0, 1023)) - 512;
      for (int c = 0; c < 4; c++) begin
        res_valid <= 1; res_data <= RES_W'(sc[c]);
        do @(negedge clk); while (!res_ready);
        @(posedge clk);
      end
      res_valid <= 0;
      // a fifth score must be refused until acknowledged
      res_valid <= 1; res_data <= '0;
      repeat (3) @(negedge clk);
      check(!res_ready, "score stream held while result unread");
      @(posedge clk);
      res_valid <= 0;
      check(irq == (r != 0), $sformatf("irq level, round %0d", r));
      axi_read(REG_STATUS, d);
      check(d[0] == 1, "STATUS result valid");
      for (int c = 0; c < 4; c++) begin
        axi_read(REG_RES0 + 8'(4*c), d);
        check($signed(d) == sc[c], $sformatf("score %0d = %0d got %0d", c, sc[c], $signed(d)));
      end
      axi_read(REG_COUNT, d);
      check(d == 32'(r + 1), "result count");
      axi_write(REG_STATUS, 32'h1);
      check(!irq, "irq cleared by acknowledge");
      axi_read(REG_STATUS, d);
      check(d[0] == 0, "STATUS cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
