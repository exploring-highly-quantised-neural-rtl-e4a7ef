// mvau_harness: drives one mvau instance with random weights, thresholds and
// input vectors and checks every output against a reference computed here.
// Used by tb_mvau for two configurations. The first half of the vectors is
// sent back to back with an always-ready consumer to check the timing: the
// first result appears SF+1 cycles after the last input beat of an idle
// unit, and results of successive vectors are max(MW/IN_PAR, SF*NF) cycles
// apart. The second half uses random input gaps and a randomly stalling
// consumer.
module mvau_harness
  import cqmlp_pkg::*;
#(
  parameter int unsigned MW = 16, MH = 8, SIMD = 4, PE = 2,
  parameter int unsigned IN_W = 8,
  parameter bit          IN_SIGNED = 1'b1,
  parameter int unsigned IN_PAR = 4,
  parameter bit          USE_ACT = 1'b1,
  parameter int unsigned NV = 24,
  parameter int          THR_SPAN = 300
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_stalls
);
  localparam int unsigned ACC_W    = acc_width(IN_W, 2, MW);
  localparam int unsigned OUT_BITS = USE_ACT ? 2 : ACC_W;
  localparam int unsigned SF = MW / SIMD, NF = MH / PE, NBEAT = MW / IN_PAR;
  localparam int unsigned II = (NBEAT > SF * NF) ? NBEAT : SF * NF;

  logic in_valid, in_ready, out_valid, out_ready, cfg_we;
  logic [IN_PAR*IN_W-1:0] in_data;
  logic [PE*OUT_BITS-1:0] out_data;
  cfg_wr_t cfg;

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_W(IN_W), .IN_SIGNED(IN_SIGNED),
         .IN_PAR(IN_PAR), .W_W(2), .USE_ACT(USE_ACT), .OUT_W(2), .LAYER_ID(3)) dut (.*);

  int w   [MH][MW];
  int thr [MH][3];
  int x   [NV][MW];
  int expq[$];
  int n_out = 0, cyc = 0, last_in_cyc = -1, first_out_cyc = -1;
  int fin_cyc[$];
  bit random_phase = 0;

  always @(posedge clk) cyc <= cyc + 1;
  // handshake of the coming rising edge, sampled while inputs are stable
  logic in_fire;
  always @(negedge clk) in_fire = in_valid && in_ready;

  function automatic int activation(int a, int n);
    if (!USE_ACT) return a;
    return int'(a >= thr[n][0]) + int'(a >= thr[n][1]) + int'(a >= thr[n][2]);
  endfunction

  // consumer / checker
  always @(posedge clk) begin
    if (rst_n && out_valid && !out_ready) n_stalls <= n_stalls + 1;
    if (rst_n && out_valid && out_ready) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      for (int p = 0; p < PE; p++) begin
        int got;
        got = USE_ACT ? int'(out_data[p*OUT_BITS +: OUT_BITS])
                      : int'($signed(out_data[p*OUT_BITS +: OUT_BITS]));
        checks++;
        if (expq.size() == 0 || got != expq[0]) begin
          failures++;
          if (failures < 10) $display("FAIL mvau out %0d lane %0d got %0d exp %0d", n_out, p, got,
                                      (expq.size() != 0) ? expq[0] : 0);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
      n_out++;
      if (n_out % NF == 0) fin_cyc.push_back(cyc);
    end
    out_ready <= random_phase ? ($urandom_range(0, 2) == 0) : 1'b1;
  end

  initial begin
    done = 0; checks = 0; failures = 0; n_stalls = 0;
    in_valid = 0; in_data = '0; cfg_we = 0; cfg = '0;
    // random parameters and inputs
    for (int n = 0; n < MH; n++) begin
      int t;
      for (int c = 0; c < MW; c++) w[n][c] = int'($urandom_range(0, 3)) - 2;
      t = int'($urandom_range(0, THR_SPAN)) - THR_SPAN / 2;
      for (int k = 0; k < 3; k++) begin
        thr[n][k] = t;
        t = t + int'($urandom_range(0, THR_SPAN / 3));
      end
    end
    for (int v = 0; v < NV; v++)
      for (int c = 0; c < MW; c++)
        x[v][c] = IN_SIGNED ? int'($urandom_range(0, 2**IN_W - 1)) - 2**(IN_W-1)
                            : int'($urandom_range(0, 2**IN_W - 1));
    for (int v = 0; v < NV; v++)
      for (int n = 0; n < MH; n++) begin
        automatic int a = 0;
        for (int c = 0; c < MW; c++) a += w[n][c] * x[v][c];
        expq.push_back(activation(a, n));
      end
    wait (rst_n);
    @(posedge clk);
    // configuration (includes a write to another layer, which must be ignored)
    for (int n = 0; n < MH; n++) begin
      for (int c = 0; c < MW; c++) begin
        cfg_we <= 1; cfg.layer <= 4'd3; cfg.sel <= CFG_WEIGHT;
        cfg.row <= 9'(n); cfg.col <= 9'(c); cfg.data <= 32'(w[n][c]);
        @(posedge clk);
        cfg.layer <= 4'd2; cfg.data <= 32'(1);   // other layer: ignored
        @(posedge clk);
      end
      for (int k = 0; k < 3; k++) begin
        cfg_we <= 1; cfg.layer <= 4'd3; cfg.sel <= CFG_THRESH;
        cfg.row <= 9'(n); cfg.col <= 9'(k); cfg.data <= 32'(thr[n][k]);
        @(posedge clk);
      end
    end
    cfg_we <= 0;
    repeat (2) @(posedge clk);
    // vectors
    for (int v = 0; v < NV; v++) begin
      if (v == NV / 2) begin
        // wait for the timed half to finish, then turn on random stalls
        in_valid <= 0;
        while (fin_cyc.size() < NV / 2) @(posedge clk);
        random_phase = 1;
      end
      for (int b = 0; b < NBEAT; b++) begin
        for (int j = 0; j < IN_PAR; j++) begin
          in_data[j*IN_W +: IN_W] <= IN_W'(x[v][b*IN_PAR + j]);
        end
        in_valid <= 1;
        @(posedge clk);
        while (!in_fire) @(posedge clk);
        if (v == 0 && b == NBEAT - 1) last_in_cyc = cyc;
        if (random_phase && $urandom_range(0, 3) == 0) begin
          in_valid <= 0;
          repeat ($urandom_range(1, 4)) @(posedge clk);
        end
      end
    end
    in_valid <= 0;
    while (expq.size() != 0) @(posedge clk);
    repeat (2) @(posedge clk);
    // timing checks
    checks++;
    if (first_out_cyc - last_in_cyc != SF + 1) begin
      failures++;
      $display("FAIL mvau latency %0d expected %0d", first_out_cyc - last_in_cyc, SF + 1);
    end
    for (int v = 2; v < NV / 2; v++) begin
      checks++;
      if (fin_cyc[v] - fin_cyc[v-1] != II) begin
        failures++;
        $display("FAIL mvau interval %0d expected %0d", fin_cyc[v] - fin_cyc[v-1], II);
      end
    end
    done = 1;
  end
endmodule
