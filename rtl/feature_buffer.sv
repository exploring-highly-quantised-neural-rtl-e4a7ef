// feature_buffer: the input feature buffer of the intrusion detector.
//
// Every CAN message arrives as ten INT8 values (the encoded identifier and
// payload). The buffer keeps the last N_MSG = 4 messages in a shift register
// and, for each new message once four are held, streams the whole window of
// N_MSG*MSG_BYTES = 40 values, oldest message first and element 0 of each
// message first, OUT_LANES values per beat (5 beats of 8 values). The
// first three messages after reset or clear only fill the window (warm-up).
//
// Interface: msg_valid/msg_ready/msg_data (element k in bits [8k+7:8k]),
// win_valid/win_ready/win_data (lane j in bits [8j+7:8j]), clear empties
// the window, fill counts held messages (saturates at N_MSG).
// Timing: a message accepted in cycle t gives its first window beat in
// cycle t+1; msg_ready is low while a window is being streamed, so a new
// message waits until the last beat has been taken.
// Window length and contents (4 messages of 10 INT8 values) follow the
// published model; order, warm-up and handshake are this design's choices.
module feature_buffer #(
  parameter int unsigned N_MSG     = 4,
  parameter int unsigned MSG_BYTES = 10,
  parameter int unsigned OUT_LANES = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         msg_valid,
  output logic                         msg_ready,
  input  logic [MSG_BYTES*8-1:0]       msg_data,
  output logic                         win_valid,
  input  logic                         win_ready,
  output logic [OUT_LANES*8-1:0]       win_data,
  output logic [$clog2(N_MSG+1)-1:0]   fill
);
  localparam int unsigned N_EL   = N_MSG * MSG_BYTES;
  localparam int unsigned N_BEAT = N_EL / OUT_LANES;
  localparam int unsigned BW     = (N_BEAT > 1) ? $clog2(N_BEAT) : 1;

  // win[0] is the oldest element, win[N_EL-1] the newest.
  logic [7:0]    win [N_EL];
  logic          busy;
  logic [BW-1:0] beat;

  assign msg_ready = !busy && !clear;
  assign win_valid = busy;

  always_comb begin
    for (int unsigned j = 0; j < OUT_LANES; j++)
      win_data[j*8 +: 8] = win[beat*OUT_LANES + j];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      fill <= '0;
      busy <= 1'b0;
      beat <= '0;
    end else if (busy) begin
      if (win_ready) begin
        if (beat == BW'(N_BEAT - 1)) begin
          busy <= 1'b0;
          beat <= '0;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end else if (msg_valid) begin
      if (fill != N_MSG[$bits(fill)-1:0]) fill <= fill + 1'b1;
      // Window is complete once this message makes N_MSG.
      busy <= (fill >= N_MSG[$bits(fill)-1:0] - 1'b1);
    end
  end

  always_ff @(posedge clk) begin
    if (msg_valid && msg_ready) begin
      for (int unsigned i = 0; i < N_EL - MSG_BYTES; i++) win[i] <= win[i + MSG_BYTES];
      for (int unsigned k = 0; k < MSG_BYTES; k++) win[N_EL - MSG_BYTES + k] <= msg_data[k*8 +: 8];
    end
  end

  initial assert (N_EL % OUT_LANES == 0)
    else $error("feature_buffer: OUT_LANES must divide N_MSG*MSG_BYTES");
  a_win_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
                               (win_valid && !win_ready) |=> win_valid && $stable(win_data));
endmodule
