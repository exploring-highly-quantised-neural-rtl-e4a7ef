// cqmlp_pkg: constants and small helpers shared by the CQMLP intrusion-detection
// accelerator.
//
// The network is a 2-bit quantised multi-layer perceptron that classifies a
// window of four CAN messages (10 INT8 values each, 40 inputs) as benign, DoS,
// fuzzing or RPM-spoof. Layer sizes 40-256-128-64-32-4, 2-bit weights and
// activations and the INT8 input follow the published model. The folding
// (SIMD lanes per layer), the AXI4-Lite register map and the configuration
// address layout are this design's own choices.
package cqmlp_pkg;

  // ---- Model shape ------------------------------------------------------
  localparam int unsigned N_MSG      = 4;                  // messages per window
  localparam int unsigned MSG_BYTES  = 10;                 // INT8 values per message
  localparam int unsigned N_IN       = N_MSG * MSG_BYTES;  // 40 input units
  localparam int unsigned N_CLASSES  = 4;                  // benign, DoS, fuzzing, RPM-spoof
  localparam int unsigned N_LAYERS   = 5;

  localparam int unsigned IN_BITS    = 8;  // signed INT8 input features
  localparam int unsigned W_BITS     = 2;  // signed 2-bit weights
  localparam int unsigned A_BITS     = 2;  // unsigned 2-bit activations

  // Layer widths: LAYER_DIM[i] inputs, LAYER_DIM[i+1] outputs.
  localparam int unsigned LAYER_DIM [N_LAYERS+1] = '{40, 256, 128, 64, 32, 4};
  // SIMD lanes per layer (PE = 1 everywhere). Smallest divisor of the layer's
  // input count that brings the fold (MW/SIMD * MH) under 2000 cycles, i.e.
  // 100000 inferences per second at 200 MHz, with PE*SIMD*W_BITS <= 80.
  localparam int unsigned LAYER_SIMD [N_LAYERS] = '{8, 32, 8, 2, 1};
  localparam int unsigned LAYER_PE   [N_LAYERS] = '{1, 1, 1, 1, 1};
  localparam int unsigned WWIDTH_MAX = 80;

  // Accumulator width that cannot overflow for mw products of an in_w-bit
  // input (signed or unsigned) and a signed w_w-bit weight.
  function automatic int unsigned acc_width(int unsigned in_w, int unsigned w_w,
                                            int unsigned mw);
    return in_w + w_w + $clog2(mw) + 1;
  endfunction

  // Input element width of layer l: INT8 for layer 0, activations otherwise.
  function automatic int unsigned layer_in_w(int unsigned l);
    return (l == 0) ? IN_BITS : A_BITS;
  endfunction

  // ---- Configuration port ----------------------------------------------
  localparam int unsigned CFG_ROW_W = 9;   // neuron index (MH <= 512)
  localparam int unsigned CFG_COL_W = 9;   // input index / threshold index
  typedef enum logic {CFG_WEIGHT = 1'b0, CFG_THRESH = 1'b1} cfg_sel_e;

  typedef struct packed {
    logic [3:0]           layer;
    cfg_sel_e             sel;
    logic [CFG_ROW_W-1:0] row;
    logic [CFG_COL_W-1:0] col;
    logic [31:0]          data;
  } cfg_wr_t;

  // ---- AXI4-Lite register map (byte addresses) ---------------------------
  localparam logic [7:0] REG_CTRL     = 8'h00; // [0] irq_en, [1] clear window (self-clearing)
  localparam logic [7:0] REG_STATUS   = 8'h04; // [0] result valid (W1C), [1] msg ready, [6:4] fill
  localparam logic [7:0] REG_COUNT    = 8'h08; // results produced since reset
  localparam logic [7:0] REG_MSG0     = 8'h10; // message bytes 0..3
  localparam logic [7:0] REG_MSG1     = 8'h14; // message bytes 4..7
  localparam logic [7:0] REG_MSG2     = 8'h18; // bytes 8..9; writing it submits the message
  localparam logic [7:0] REG_RES0     = 8'h20; // class scores 0..3 at 0x20,0x24,0x28,0x2C
  localparam logic [7:0] REG_CFG_ADDR = 8'h40; // [27:24] layer, [20] sel, [17:9] row, [8:0] col
  localparam logic [7:0] REG_CFG_DATA = 8'h44; // writing it performs the configuration write

endpackage
