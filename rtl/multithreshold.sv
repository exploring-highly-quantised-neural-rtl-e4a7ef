// multithreshold: the quantised activation of one hidden-layer neuron.
//
// Batch normalisation, ReLU and 2-bit quantisation of a neuron are one
// monotone staircase of its integer accumulator, so they are folded into
// 2**OUT_W - 1 ascending per-neuron thresholds. The activation is the number
// of thresholds the accumulator reaches: act = #{ i : acc >= thr[i] }.
// Purely combinational; no clock.
// Interface: acc (signed ACC_W bits), thr (threshold i in bits
// [i*ACC_W +: ACC_W], signed), act (unsigned OUT_W bits).
// That the activations are 2-bit follows the published model; the
// threshold form and the ">=" comparison are this design's realisation of
// the batch-norm + ReLU layers.
module multithreshold #(
  parameter int unsigned ACC_W = 17,
  parameter int unsigned OUT_W = 2
) (
  input  logic signed [ACC_W-1:0]               acc,
  input  logic        [(2**OUT_W-1)*ACC_W-1:0]  thr,
  output logic        [OUT_W-1:0]               act
);
  localparam int unsigned N_T = 2**OUT_W - 1;

  always_comb begin
    act = '0;
    for (int unsigned i = 0; i < N_T; i++) begin
      if (acc >= $signed(thr[i*ACC_W +: ACC_W])) act = act + 1'b1;
    end
  end
endmodule
