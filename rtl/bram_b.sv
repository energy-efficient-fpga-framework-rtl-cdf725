// bram_b: on-chip buffer for one BUFF_K x BUFF_N tile of matrix B (BRAM_B).
//
// The tile is loaded once per pass by read_b and then read by the kernel for
// every row of A streamed past it, which is what keeps B's off-chip traffic
// low. Entry k holds row k of the tile: BUFF_N FP32 values, column n in bits
// [32*n+31 : 32*n]. It is written one 512-bit memory beat at a time (wr_beat
// selects which group of sixteen columns) and read one whole row per cycle,
// so the kernel gets BUFF_N operands each clock.
//
// Timing: a write lands on the rising edge with wr_en high; rd_data holds
// row rd_addr one cycle after rd_addr is presented (registered read, as a
// block RAM). That B is held in BRAM follows the design; the row-wide port,
// the beat-wise write and the one-cycle read latency are this implementation's
// choices.
module bram_b
  import ce_pkg::*;
#(
  parameter int unsigned BUFF_K = 128,
  parameter int unsigned BUFF_N = 16
) (
  input  logic                              clk,
  input  logic                              wr_en,
  input  logic [$clog2(BUFF_K)-1:0]         wr_addr,
  input  logic [$clog2(BUFF_N/BEAT_WORDS+1)-1:0] wr_beat,
  input  logic [BEAT_W-1:0]                 wr_data,
  input  logic [$clog2(BUFF_K)-1:0]         rd_addr,
  output logic [BUFF_N*WORD_W-1:0]          rd_data
);

  logic [BUFF_N*WORD_W-1:0] mem [BUFF_K];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][BEAT_W*wr_beat +: BEAT_W] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
