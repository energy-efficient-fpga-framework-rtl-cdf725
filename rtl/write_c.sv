// write_c: the "Write C" process of the dataflow region.
//
// It takes one beat from Stream_C_in (sixteen values of C as they were before
// this pass) and the matching beat from Stream_C_out (sixteen new partial
// sums from the kernel), adds them lane by lane in FP32, and writes the result
// back to the same place in C. Row m of the tile, columns n0 .. n0+BUFF_N-1, is
// BUFF_N/16 consecutive beats; consecutive rows are `stride` = N/16 beats
// apart. Over the passes for one column block this accumulates
// C += A[:, k0:k0+BUFF_K] * B[k0:k0+BUFF_K, n0:n0+BUFF_N] for each k0 in turn.
//
// On a start pulse it latches the beat address of the slice's first element,
// the stride, the row count and the row length in beats (row_beats, at most
// BUFF_N/16; shorter in the last column block of a matrix whose N is not a
// multiple of BUFF_N). A write is offered when both streams have a
// beat; both beats are consumed in the cycle the memory accepts the write
// (wr_valid && wr_ready). done pulses one cycle after the last write is
// accepted; an accepted write is taken to be visible to later reads.
// The two input streams and the write-back follow the design; the lane-wise
// add of the old C value, the write protocol and the ordering rule are this
// implementation's choices.
module write_c
  import ce_pkg::*;
#(
  parameter int unsigned BUFF_N = 16,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DIM_W  = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ADDR_W-1:0]    base,
  input  logic [ADDR_W-1:0]    stride,
  input  logic [DIM_W-1:0]     rows,
  input  logic [$clog2(BUFF_N/BEAT_WORDS+1)-1:0] row_beats,
  output logic                 busy,
  output logic                 done,
  // Stream_C_in
  input  logic                 cin_valid,
  output logic                 cin_ready,
  input  logic [BEAT_W-1:0]    cin_data,
  // Stream_C_out
  input  logic                 cout_valid,
  output logic                 cout_ready,
  input  logic [BEAT_W-1:0]    cout_data,
  // memory write port
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [BEAT_W-1:0]    wr_data
);

  localparam int unsigned NB = BUFF_N / BEAT_WORDS;
  localparam int unsigned BW = $clog2(NB + 1);

  logic [ADDR_W-1:0] row_addr;
  logic [DIM_W-1:0]  row, n_rows;
  logic [BW-1:0]     n_beats;
  logic [BW-1:0]     b;
  logic              fire;

  for (genvar i = 0; i < BEAT_WORDS; i++) begin : g_add
    fp32_add u_add (.a(cin_data[WORD_W*i +: WORD_W]), .b(cout_data[WORD_W*i +: WORD_W]),
                    .y(wr_data[WORD_W*i +: WORD_W]));
  end

  assign wr_valid   = busy && cin_valid && cout_valid;
  assign wr_addr    = row_addr + ADDR_W'(b);
  assign fire       = wr_valid && wr_ready;
  assign cin_ready  = fire;
  assign cout_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      row_addr <= '0;
      row      <= '0;
      n_rows   <= '0;
      n_beats  <= '0;
      b        <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= (rows != '0) && (row_beats != '0);
        done     <= (rows == '0) || (row_beats == '0);
        row_addr <= base;
        n_rows   <= rows;
        n_beats  <= row_beats;
        row      <= '0;
        b        <= '0;
      end else if (fire) begin
        if (b == n_beats - 1'b1) begin
          b        <= '0;
          row      <= row + 1'b1;
          row_addr <= row_addr + stride;
          if (row == n_rows - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          b <= b + 1'b1;
        end
      end
    end
  end

  // A write, once offered, is held until the memory takes it.
  a_hold_wr: assert property (@(posedge clk) disable iff (!rst_n)
                              (wr_valid && !wr_ready) |=> (wr_valid && $stable(wr_addr)));

endmodule
