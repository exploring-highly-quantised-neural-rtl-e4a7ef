// stream_fifo: Streaming FIFO_0 of the accelerator, the ready/valid buffer
// that sits between the input feature buffer and the first matrix-vector
// activation unit.
//
// A synchronous first-word-fall-through FIFO built on a circular array with
// read and write pointers one bit wider than the address. out_data shows the
// head entry whenever out_valid is high. A word written into an empty FIFO
// appears on the output the next cycle; in_ready is low only when full, and
// a full FIFO accepts a write in the same cycle as a read.
// Interface: in_valid/in_ready/in_data and out_valid/out_ready/out_data
// streams (transfer when valid and ready are both high), count = occupancy.
// The block's name and position come from the published block diagram; its
// depth and width are this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 32   // power of two
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  logic do_wr, do_rd;
  assign out_valid = (wptr != rptr);
  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]) || out_ready;
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;
  assign out_data  = mem[rptr[AW-1:0]];
  assign count     = $clog2(DEPTH+1)'(wptr - rptr);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= in_data;
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("stream_fifo: DEPTH must be a power of two");
  // A producer must hold its word until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (in_valid && !in_ready) |=> in_valid && $stable(in_data);
  endproperty
  a_hold: assert property (p_hold);
endmodule
