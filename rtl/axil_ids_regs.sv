// axil_ids_regs: AXI4-Lite slave front end of the intrusion-detection
// accelerator, the port through which the ECU's ARM cores drive it.
//
// The host writes each encoded CAN message as three 32-bit words (MSG0:
// bytes 0-3, MSG1: bytes 4-7, MSG2: bytes 8-9); the write to MSG2 hands the
// ten bytes to the feature buffer. If the buffer is busy that write is held
// (AWREADY/WREADY low) until the buffer takes it. The four class scores
// leaving the last layer are collected into RES0..RES3; when the fourth
// arrives STATUS[0] is set, COUNT increments and irq (level) is raised if
// CTRL[0] is set. The host acknowledges by writing 1 to STATUS[0]; until
// then no further score is accepted, which stalls the layers behind it.
// Weights and thresholds are written with CFG_ADDR ([27:24] layer,
// [20] 0 = weight / 1 = threshold, [17:9] row, [8:0] column) followed by a
// write to CFG_DATA, which issues one registered cfg_we pulse.
// Writing CTRL[1] = 1 issues a one-cycle clear of the message window.
// Timing: a read returns data one cycle after the address handshake; a
// write is answered one cycle after its address and data handshake.
// An AXI slave with a completion interrupt follows the published
// integration; the register map and the register-based data path (rather
// than DMA) are this design's choices. Byte strobes are ignored.
module axil_ids_regs
  import cqmlp_pkg::*;
#(
  parameter int unsigned ADDR_W    = 8,
  parameter int unsigned N_CLS     = 4,
  parameter int unsigned RES_W     = 10,
  parameter int unsigned MSG_B     = 10,
  parameter int unsigned FILL_W    = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]      s_axil_awaddr,
  input  logic                   s_axil_awvalid,
  output logic                   s_axil_awready,
  input  logic [31:0]            s_axil_wdata,
  input  logic [3:0]             s_axil_wstrb,
  input  logic                   s_axil_wvalid,
  output logic                   s_axil_wready,
  output logic [1:0]             s_axil_bresp,
  output logic                   s_axil_bvalid,
  input  logic                   s_axil_bready,
  input  logic [ADDR_W-1:0]      s_axil_araddr,
  input  logic                   s_axil_arvalid,
  output logic                   s_axil_arready,
  output logic [31:0]            s_axil_rdata,
  output logic [1:0]             s_axil_rresp,
  output logic                   s_axil_rvalid,
  input  logic                   s_axil_rready,
  output logic                   irq,
  // message stream to the feature buffer
  output logic                   msg_valid,
  input  logic                   msg_ready,
  output logic [MSG_B*8-1:0] msg_data,
  output logic                   win_clear,
  input  logic [FILL_W-1:0]      win_fill,
  // class-score stream from the last layer
  input  logic                   res_valid,
  output logic                   res_ready,
  input  logic [RES_W-1:0]       res_data,
  // configuration write port
  output logic                   cfg_we,
  output cfg_wr_t                cfg
);
  localparam int unsigned CW = (N_CLS > 1) ? $clog2(N_CLS) : 1;

  logic [31:0]      msg0, msg1, cfg_addr, count;
  logic             irq_en, done;
  logic [RES_W-1:0] res [N_CLS];
  logic [CW-1:0]    res_cnt;

  // ---------------- write channel ----------------
  logic [7:0] waddr;
  logic       wr_pending, is_msg2, wr_go;
  assign waddr      = 8'(s_axil_awaddr);
  assign wr_pending = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign is_msg2    = (waddr == REG_MSG2);
  assign wr_go      = wr_pending && (!is_msg2 || msg_ready);

  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign s_axil_bresp   = 2'b00;

  assign msg_valid = wr_pending && is_msg2;
  assign msg_data  = (MSG_B*8)'({s_axil_wdata[15:0], msg1, msg0});

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      msg0          <= '0;
      msg1          <= '0;
      cfg_addr      <= '0;
      irq_en        <= 1'b0;
      win_clear     <= 1'b0;
      cfg_we        <= 1'b0;
      cfg           <= '0;
    end else begin
      win_clear <= 1'b0;
      cfg_we    <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        unique case (waddr)
          REG_CTRL: begin
            irq_en    <= s_axil_wdata[0];
            win_clear <= s_axil_wdata[1];
          end
          REG_MSG0:     msg0     <= s_axil_wdata;
          REG_MSG1:     msg1     <= s_axil_wdata;
          REG_CFG_ADDR: cfg_addr <= s_axil_wdata;
          REG_CFG_DATA: begin
            cfg_we     <= 1'b1;
            cfg.layer  <= cfg_addr[27:24];
            cfg.sel    <= cfg_sel_e'(cfg_addr[20]);
            cfg.row    <= cfg_addr[17:9];
            cfg.col    <= cfg_addr[8:0];
            cfg.data   <= s_axil_wdata;
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------- result collection ----------------
  assign res_ready = !done;
  assign irq       = irq_en && done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      done    <= 1'b0;
      res_cnt <= '0;
      count   <= '0;
    end else begin
      if (wr_go && waddr == REG_STATUS && s_axil_wdata[0]) done <= 1'b0;
      if (res_valid && res_ready) begin
        if (res_cnt == CW'(N_CLS - 1)) begin
          res_cnt <= '0;
          done    <= 1'b1;
          count   <= count + 1'b1;
        end else begin
          res_cnt <= res_cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (res_valid && res_ready) res[res_cnt] <= res_data;
  end

  // ---------------- read channel ----------------
  logic [7:0]  raddr;
  logic [31:0] rmux;
  assign raddr          = 8'(s_axil_araddr);
  assign s_axil_arready = !s_axil_rvalid;
  assign s_axil_rresp   = 2'b00;

  always_comb begin
    rmux = '0;
    if (raddr == REG_CTRL)          rmux = {31'b0, irq_en};
    else if (raddr == REG_STATUS)   rmux = {25'b0, 3'(win_fill), 2'b0, msg_ready, done};
    else if (raddr == REG_COUNT)    rmux = count;
    else if (raddr == REG_MSG0)     rmux = msg0;
    else if (raddr == REG_MSG1)     rmux = msg1;
    else if (raddr == REG_CFG_ADDR) rmux = cfg_addr;
    else if (raddr >= REG_RES0 && raddr < REG_RES0 + 8'(4 * N_CLS) && raddr[1:0] == 2'b00)
      rmux = 32'($signed(res[CW'((raddr - REG_RES0) >> 2)]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= rmux;
      end
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  (s_axil_rvalid && !s_axil_rready) |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule
