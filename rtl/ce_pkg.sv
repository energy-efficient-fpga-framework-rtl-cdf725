// ce_pkg: types and constants shared by the blocks of the GEMM compute engine.
//
// The engine moves data through 512-bit memory beats, the full data width the
// framework uses between external memory and the FPGA fabric. A beat carries
// sixteen IEEE-754 single-precision (FP32) words; word j sits in bits
// [32*j+31 : 32*j], so the element with the lowest column index is in the
// least significant word. Addresses on the memory ports count beats, not bytes.
package ce_pkg;

  localparam int unsigned WORD_W     = 32;                  // FP32, no quantization
  localparam int unsigned BEAT_W     = 512;                 // memory / stream beat width
  localparam int unsigned BEAT_WORDS = BEAT_W / WORD_W;     // 16 FP32 values per beat

  typedef logic [BEAT_W-1:0] beat_t;

  // Field view of an FP32 word.
  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] frac;
  } fp32_t;

  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

endpackage
