// mvau: matrix-vector activation unit, one quantised fully connected layer
// (MatrixVectorActivation_0 .. _4 of the accelerator).
//
// The layer multiplies an MW-element input vector by an MH x MW matrix of
// signed W_W-bit weights. It is folded: each cycle PE neurons each take SIMD
// products, so one vector takes SF = MW/SIMD cycles per neuron fold and
// NF = MH/PE folds, SF*NF cycles in all. After the last product of a fold
// the PE accumulators go through the multithreshold activation (hidden
// layers, USE_ACT = 1: batch-norm + ReLU + 2-bit quantisation as thresholds)
// or leave as raw signed accumulators (output layer, USE_ACT = 0).
//
// The input vector is double-buffered: a new vector is loaded, IN_PAR
// elements per beat, into one bank while the other bank is being computed,
// so a layer accepts its next vector without waiting for the current one.
// Weights sit in a memory of NF*SF words of PE*SIMD*W_W bits (word nf*SF+sf,
// lane pe*SIMD+simd holds the weight of neuron nf*PE+pe, input sf*SIMD+simd);
// thresholds in a memory of NF words, each holding the 2**OUT_W-1
// thresholds of PE neurons. Both memories have one registered read port
// (block-RAM style): the address of the step after the current one is
// computed in advance, so the word a step needs is already in the read
// register when the step executes. Both are written through the cfg port:
// cfg.layer must equal LAYER_ID, cfg.row is the neuron, cfg.col the input
// index (weights) or the threshold index (thresholds), cfg.data the value.
//
// Interface: in_valid/in_ready/in_data (element j in [j*IN_W +: IN_W]),
// out_valid/out_ready/out_data (PE results, result p in
// [p*OUT_BITS +: OUT_BITS]). Timing: computing starts the cycle after the
// last input beat of a vector; a fold's result is registered at the end of
// its SF-th cycle and the next fold continues without a gap unless the
// previous result is still waiting (out_valid && !out_ready), which stalls
// the unit. Configuration writes must not overlap an inference: the read
// registers reload every cycle, so a write is seen from the cycle after it.
// Layer sizes, 2-bit weights/activations and INT8 input follow the published
// model; the folding, the double buffer, the weight-memory layout and the
// configuration port are this design's choices.
module mvau
  import cqmlp_pkg::*;
#(
  parameter int unsigned MW        = 40,
  parameter int unsigned MH        = 256,
  parameter int unsigned SIMD      = 8,
  parameter int unsigned PE        = 1,
  parameter int unsigned IN_W      = 8,
  parameter bit          IN_SIGNED = 1'b1,
  parameter int unsigned IN_PAR    = 8,
  parameter int unsigned W_W       = 2,
  parameter bit          USE_ACT   = 1'b1,
  parameter int unsigned OUT_W     = 2,
  parameter int unsigned ACC_W     = acc_width(IN_W, W_W, MW),
  parameter int unsigned LAYER_ID  = 0,
  localparam int unsigned OUT_BITS = USE_ACT ? OUT_W : ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [IN_PAR*IN_W-1:0]   in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [PE*OUT_BITS-1:0]   out_data,
  input  logic                     cfg_we,
  input  cfg_wr_t                  cfg
);
  localparam int unsigned SF     = MW / SIMD;
  localparam int unsigned NF     = MH / PE;
  localparam int unsigned NBEAT  = MW / IN_PAR;
  localparam int unsigned N_T    = 2**OUT_W - 1;
  localparam int unsigned WWORD  = PE * SIMD * W_W;
  localparam int unsigned SFW    = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NFW    = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned LDW    = (NBEAT > 1) ? $clog2(NBEAT) : 1;

  // ---------------- parameter memories ----------------
  localparam int unsigned TWORD = PE * N_T * ACC_W;
  localparam int unsigned WAW   = (NF*SF > 1) ? $clog2(NF*SF) : 1;

  logic [WWORD-1:0] wmem [NF*SF];
  logic [TWORD-1:0] tmem [NF];

  logic cfg_hit;
  assign cfg_hit = cfg_we && (cfg.layer == 4'(LAYER_ID));

  always_ff @(posedge clk) begin
    if (cfg_hit && cfg.sel == CFG_WEIGHT && int'(cfg.row) < MH && int'(cfg.col) < MW)
      wmem[(int'(cfg.row) / PE) * SF + int'(cfg.col) / SIMD]
          [((int'(cfg.row) % PE) * SIMD + int'(cfg.col) % SIMD) * W_W +: W_W] <= cfg.data[W_W-1:0];
  end

  if (USE_ACT) begin : g_tmem
    always_ff @(posedge clk) begin
      if (cfg_hit && cfg.sel == CFG_THRESH && int'(cfg.row) < MH && int'(cfg.col) < N_T)
        tmem[int'(cfg.row) / PE][((int'(cfg.row) % PE) * N_T + int'(cfg.col)) * ACC_W +: ACC_W]
            <= cfg.data[ACC_W-1:0];
    end
  end else begin : g_no_tmem
    // The output layer has no thresholds: keep the array defined.
    always_ff @(posedge clk) tmem[0] <= '0;
  end

  // ---------------- input double buffer ----------------
  logic [IN_W-1:0] ibuf [2][MW];
  logic [1:0]      full;
  logic            wr_bank, rd_bank;
  logic [LDW-1:0]  ld_cnt;

  assign in_ready = !full[wr_bank];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int unsigned j = 0; j < IN_PAR; j++)
        ibuf[wr_bank][int'(ld_cnt) * IN_PAR + j] <= in_data[j*IN_W +: IN_W];
  end

  // ---------------- compute ----------------
  logic [SFW-1:0] sf;
  logic [NFW-1:0] nf;
  logic signed [ACC_W-1:0] acc      [PE];
  logic signed [ACC_W-1:0] acc_next [PE];
  logic [WWORD-1:0]        wword;
  logic [TWORD-1:0]        tword;
  logic [WAW-1:0]          waddr, waddr_next;
  logic [NFW-1:0]          nf_next;
  logic                    active, last_sf, stall, step;

  assign active  = full[rd_bank];
  assign last_sf = (sf == SFW'(SF - 1));
  assign stall   = last_sf && out_valid && !out_ready;
  assign step    = active && !stall;

  // Prefetched read addresses: waddr = nf*SF + sf of the current step.
  always_comb begin
    waddr_next = waddr;
    nf_next    = nf;
    if (step) begin
      waddr_next = (waddr == WAW'(NF*SF - 1)) ? '0 : waddr + 1'b1;
      if (last_sf) nf_next = (nf == NFW'(NF - 1)) ? '0 : nf + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    wword <= wmem[waddr_next];
    tword <= tmem[nf_next];
  end

  always_comb begin
    for (int unsigned p = 0; p < PE; p++) begin
      logic signed [ACC_W-1:0] psum, xe, we;
      psum = '0;
      for (int unsigned s = 0; s < SIMD; s++) begin
        if (IN_SIGNED) xe = ACC_W'($signed(ibuf[rd_bank][int'(sf) * SIMD + s]));
        else           xe = ACC_W'($signed({1'b0, ibuf[rd_bank][int'(sf) * SIMD + s]}));
        we   = ACC_W'($signed(wword[(p*SIMD + s)*W_W +: W_W]));
        psum = psum + xe * we;
      end
      acc_next[p] = ((sf == '0) ? ACC_W'(0) : acc[p]) + psum;
    end
  end

  // Activation of the fold that finishes this cycle.
  logic [PE*OUT_BITS-1:0] result;
  for (genvar p = 0; p < PE; p++) begin : g_act
    if (USE_ACT) begin : g_thr
      logic [OUT_W-1:0] a;
      multithreshold #(.ACC_W(ACC_W), .OUT_W(OUT_W)) u_thr (
        .acc (acc_next[p]),
        .thr (tword[p*N_T*ACC_W +: N_T*ACC_W]),
        .act (a)
      );
      assign result[p*OUT_BITS +: OUT_BITS] = a;
    end else begin : g_raw
      assign result[p*OUT_BITS +: OUT_BITS] = acc_next[p];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full      <= '0;
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      ld_cnt    <= '0;
      sf        <= '0;
      nf        <= '0;
      waddr     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int unsigned p = 0; p < PE; p++) acc[p] <= '0;
    end else begin
      // load side
      if (in_valid && in_ready) begin
        if (ld_cnt == LDW'(NBEAT - 1)) begin
          ld_cnt        <= '0;
          full[wr_bank] <= 1'b1;
          wr_bank       <= !wr_bank;
        end else begin
          ld_cnt <= ld_cnt + 1'b1;
        end
      end
      // output register
      if (out_valid && out_ready) out_valid <= 1'b0;
      // compute side
      waddr <= waddr_next;
      if (step) begin
        for (int unsigned p = 0; p < PE; p++) acc[p] <= acc_next[p];
        if (last_sf) begin
          sf        <= '0;
          out_valid <= 1'b1;
          out_data  <= result;
          if (nf == NFW'(NF - 1)) begin
            nf            <= '0;
            full[rd_bank] <= 1'b0;
            rd_bank       <= !rd_bank;
          end else begin
            nf <= nf + 1'b1;
          end
        end else begin
          sf <= sf + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (MW % SIMD == 0 && MH % PE == 0 && MW % IN_PAR == 0)
      else $error("mvau: SIMD, IN_PAR must divide MW and PE must divide MH");
    assert (PE * SIMD * W_W <= WWIDTH_MAX)
      else $error("mvau: weight stream wider than WWIDTH_MAX");
  end
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               (out_valid && !out_ready) |=> out_valid && $stable(out_data));
endmodule
