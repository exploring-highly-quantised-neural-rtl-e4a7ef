// cqmlp_ids_top: custom-quantised MLP intrusion-detection accelerator for
// automotive CAN, the programmable-logic part of an IDS-enabled ECU.
//
// The host (an ARM core) writes every received CAN message, encoded as ten
// INT8 values, over AXI4-Lite. The feature buffer forms a window of the
// last four messages (40 values) and streams it through Streaming FIFO_0
// into a chain of five matrix-vector activation units, the layers
// 40 -> 256 -> 128 -> 64 -> 32 -> 4 of a 2-bit MLP. The four hidden layers
// apply batch-norm + ReLU as 2-bit thresholds; the last layer emits four
// signed class scores (benign, DoS, fuzzing, RPM-spoof), which the host reads
// after the completion interrupt and turns into probabilities (softmax).
//
// Dataflow: every unit has its own ready/valid handshake, so all layers work
// on successive windows at once. Per window a layer needs MW/SIMD*MH cycles:
// 1280, 1024, 1024, 1024 and 128 cycles, so one window can enter every
// 1280 cycles (156k windows/s at 200 MHz, above the 100k messages/s target).
// Interface: clk, rst_n (synchronous, active low), an AXI4-Lite slave with
// 8-bit addresses (map in cqmlp_pkg) and a level interrupt irq.
// Network shape, precisions, the FIFO-then-five-layers structure and the
// AXI slave with a completion interrupt follow the published design; the
// folding, FIFO depth, register map and sliding-window hardware are this
// design's choices.
module cqmlp_ids_top
  import cqmlp_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  output logic        irq
);
  // Per-layer geometry.
  localparam int unsigned MW0 = LAYER_DIM[0], MH0 = LAYER_DIM[1];
  localparam int unsigned MW1 = LAYER_DIM[1], MH1 = LAYER_DIM[2];
  localparam int unsigned MW2 = LAYER_DIM[2], MH2 = LAYER_DIM[3];
  localparam int unsigned MW3 = LAYER_DIM[3], MH3 = LAYER_DIM[4];
  localparam int unsigned MW4 = LAYER_DIM[4], MH4 = LAYER_DIM[5];
  localparam int unsigned LANES0 = LAYER_SIMD[0];           // window beat width
  localparam int unsigned ACC4   = acc_width(A_BITS, W_BITS, MW4);
  localparam int unsigned FILL_W = $clog2(N_MSG + 1);

  // ---------------- AXI front end ----------------
  logic                   msg_valid, msg_ready, win_clear;
  logic [MSG_BYTES*8-1:0] msg_data;
  logic [FILL_W-1:0]      fill;
  logic                   res_valid, res_ready;
  logic [ACC4-1:0]        res_data;
  logic                   cfg_we;
  cfg_wr_t                cfg;

  axil_ids_regs #(
    .ADDR_W(8), .N_CLS(N_CLASSES), .RES_W(ACC4), .MSG_B(MSG_BYTES), .FILL_W(FILL_W)
  ) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .irq,
    .msg_valid, .msg_ready, .msg_data, .win_clear, .win_fill(fill),
    .res_valid, .res_ready, .res_data,
    .cfg_we, .cfg
  );

  // ---------------- input feature buffer ----------------
  logic                  win_valid, win_ready;
  logic [LANES0*8-1:0]   win_data;

  feature_buffer #(.N_MSG(N_MSG), .MSG_BYTES(MSG_BYTES), .OUT_LANES(LANES0)) u_window (
    .clk, .rst_n, .clear(win_clear),
    .msg_valid, .msg_ready, .msg_data,
    .win_valid, .win_ready, .win_data, .fill
  );

  // ---------------- Streaming FIFO_0 ----------------
  logic                  f_valid, f_ready;
  logic [LANES0*8-1:0]   f_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;

  stream_fifo #(.WIDTH(LANES0*8), .DEPTH(FIFO_DEPTH)) u_fifo0 (
    .clk, .rst_n,
    .in_valid(win_valid), .in_ready(win_ready), .in_data(win_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .count(f_count)
  );

  // ---------------- MatrixVectorActivation_0 .. _4 ----------------
  logic                                   a0_valid, a0_ready, a1_valid, a1_ready;
  logic                                   a2_valid, a2_ready, a3_valid, a3_ready;
  logic [LAYER_PE[0]*A_BITS-1:0]          a0_data;
  logic [LAYER_PE[1]*A_BITS-1:0]          a1_data;
  logic [LAYER_PE[2]*A_BITS-1:0]          a2_data;
  logic [LAYER_PE[3]*A_BITS-1:0]          a3_data;

  mvau #(.MW(MW0), .MH(MH0), .SIMD(LAYER_SIMD[0]), .PE(LAYER_PE[0]),
         .IN_W(IN_BITS), .IN_SIGNED(1'b1), .IN_PAR(LANES0), .W_W(W_BITS),
         .USE_ACT(1'b1), .OUT_W(A_BITS), .LAYER_ID(0)) u_mva0 (
    .clk, .rst_n,
    .in_valid(f_valid), .in_ready(f_ready), .in_data(f_data),
    .out_valid(a0_valid), .out_ready(a0_ready), .out_data(a0_data),
    .cfg_we, .cfg
  );

  mvau #(.MW(MW1), .MH(MH1), .SIMD(LAYER_SIMD[1]), .PE(LAYER_PE[1]),
         .IN_W(A_BITS), .IN_SIGNED(1'b0), .IN_PAR(LAYER_PE[0]), .W_W(W_BITS),
         .USE_ACT(1'b1), .OUT_W(A_BITS), .LAYER_ID(1)) u_mva1 (
    .clk, .rst_n,
    .in_valid(a0_valid), .in_ready(a0_ready), .in_data(a0_data),
    .out_valid(a1_valid), .out_ready(a1_ready), .out_data(a1_data),
    .cfg_we, .cfg
  );

  mvau #(.MW(MW2), .MH(MH2), .SIMD(LAYER_SIMD[2]), .PE(LAYER_PE[2]),
         .IN_W(A_BITS), .IN_SIGNED(1'b0), .IN_PAR(LAYER_PE[1]), .W_W(W_BITS),
         .USE_ACT(1'b1), .OUT_W(A_BITS), .LAYER_ID(2)) u_mva2 (
    .clk, .rst_n,
    .in_valid(a1_valid), .in_ready(a1_ready), .in_data(a1_data),
    .out_valid(a2_valid), .out_ready(a2_ready), .out_data(a2_data),
    .cfg_we, .cfg
  );

  mvau #(.MW(MW3), .MH(MH3), .SIMD(LAYER_SIMD[3]), .PE(LAYER_PE[3]),
         .IN_W(A_BITS), .IN_SIGNED(1'b0), .IN_PAR(LAYER_PE[2]), .W_W(W_BITS),
         .USE_ACT(1'b1), .OUT_W(A_BITS), .LAYER_ID(3)) u_mva3 (
    .clk, .rst_n,
    .in_valid(a2_valid), .in_ready(a2_ready), .in_data(a2_data),
    .out_valid(a3_valid), .out_ready(a3_ready), .out_data(a3_data),
    .cfg_we, .cfg
  );

  // Output layer: no activation, raw class scores, one per beat (PE = 1).
  mvau #(.MW(MW4), .MH(MH4), .SIMD(LAYER_SIMD[4]), .PE(1),
         .IN_W(A_BITS), .IN_SIGNED(1'b0), .IN_PAR(LAYER_PE[3]), .W_W(W_BITS),
         .USE_ACT(1'b0), .OUT_W(A_BITS), .ACC_W(ACC4), .LAYER_ID(4)) u_mva4 (
    .clk, .rst_n,
    .in_valid(a3_valid), .in_ready(a3_ready), .in_data(a3_data),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data),
    .cfg_we, .cfg
  );

endmodule
