// hls_stream: the FIFO channel behind each stream of the dataflow region
// (Stream_A, Stream_C_in, Stream_C_out).
//
// A stream hands data from a producer process straight to a consumer process,
// so the two run concurrently and a slow consumer throttles its producer
// instead of being overrun. This one is a synchronous FIFO of DEPTH entries of
// W bits, with valid/ready handshakes on both sides: a word moves when valid
// and ready are both high on a rising clock edge. out_data shows the oldest
// entry whenever out_valid is high (first-word fall-through), so a word can pass
// through in one cycle. count reports the occupancy, which the memory readers
// use to issue no more requests than the stream can take.
//
// That streams connect the processes follows the design; the depth, the
// handshake and the occupancy output are this implementation's choices.
module hls_stream #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] v);
    return (v == AW'(DEPTH - 1)) ? '0 : v + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  // A producer that has raised in_valid keeps it and its data until accepted.
  property p_hold_in;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> (in_valid && $stable(in_data));
  endproperty
  a_hold_in: assert property (p_hold_in);

endmodule
