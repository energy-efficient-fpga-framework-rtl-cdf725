// hls_kernel: the compute kernel of the engine ("Innovative HLS Kernel").
//
// For every row m of A that arrives on Stream_A (BUFF_K FP32 values a[m][k],
// sixteen per beat) it computes, against the B tile held in bram_b,
//     p[m][n] = sum over k of a[m][k] * B[k][n],   n = 0 .. BUFF_N-1,
// and sends the BUFF_N sums on Stream_C_out as BUFF_N/16 beats. BUFF_N lanes
// work side by side, so each clock performs BUFF_N FP32 multiplies and BUFF_N
// FP32 adds: one k step for the whole row slice.
//
// Pipeline (one k per clock, no bubble between rows):
//   issue   - picks a[m][k] from the held A beat and presents k to bram_b;
//   multiply- bram_b's registered row k meets a[m][k]: BUFF_N products,
//             registered;
//   add     - each lane adds its product to its accumulator; k = 0 loads the
//             product instead. On the last k the sums go to the output buffer.
// Sums are formed in increasing k order: ((p0 + p1) + p2) + ...
// The output buffer holds one finished row while the next row accumulates;
// the last k of a row is only issued once the buffer has drained, so nothing
// ever needs to stall inside the pipeline. A row takes BUFF_K clocks when A
// arrives in time and Stream_C_out is not full.
//
// A pass normally uses the whole tile, k_beats = BUFF_K/16 and
// n_beats = BUFF_N/16. At the edges of a matrix whose K or N is not a multiple
// of the tile, a row has only 16*k_beats values of A and only the first
// n_beats output beats are sent; the lanes beyond compute values nobody reads.
//
// Interface: a_valid/a_ready/a_data (Stream_A, first-word fall-through),
// b_rd_addr/b_rd_data (bram_b, one cycle read latency), c_valid/c_ready/c_data
// (Stream_C_out). The kernel's role, the tile shape and FP32 arithmetic follow
// the design; the lane organisation, the pipeline and the summation order are
// this implementation's choices.
module hls_kernel
  import ce_pkg::*;
#(
  parameter int unsigned BUFF_K = 128,
  parameter int unsigned BUFF_N = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // row extent of the current pass, held stable during it
  input  logic [$clog2(BUFF_K/BEAT_WORDS+1)-1:0] k_beats,
  input  logic [$clog2(BUFF_N/BEAT_WORDS+1)-1:0] n_beats,
  // Stream_A
  input  logic                          a_valid,
  output logic                          a_ready,
  input  logic [BEAT_W-1:0]             a_data,
  // BRAM_B read port
  output logic [$clog2(BUFF_K)-1:0]     b_rd_addr,
  input  logic [BUFF_N*WORD_W-1:0]      b_rd_data,
  // Stream_C_out
  output logic                          c_valid,
  input  logic                          c_ready,
  output logic [BEAT_W-1:0]             c_data,
  output logic                          busy
);

  localparam int unsigned NB = BUFF_N / BEAT_WORDS;
  localparam int unsigned KW = $clog2(BUFF_K);
  localparam int unsigned JW = $clog2(BEAT_WORDS);
  localparam int unsigned OW = $clog2(NB + 1);

  // issue stage
  logic [BEAT_W-1:0] a_reg;
  logic              a_have;
  logic [JW-1:0]     j;
  logic [KW-1:0]     k;
  logic              issue, k_last;
  // multiply stage
  logic              s1_valid, s1_first, s1_last;
  logic [WORD_W-1:0] s1_a;
  // add stage
  logic              s2_valid, s2_first, s2_last;
  logic [WORD_W-1:0] s2_prod [BUFF_N];
  logic [WORD_W-1:0] prod    [BUFF_N];
  logic [WORD_W-1:0] sum     [BUFF_N];
  logic [WORD_W-1:0] acc     [BUFF_N];
  // output buffer
  logic [BUFF_N*WORD_W-1:0] out_buf;
  logic [OW-1:0]     out_left, out_idx;

  assign k_last    = ({1'b0, k} == (KW+1)'(k_beats) * (KW+1)'(BEAT_WORDS) - (KW+1)'(1));
  assign issue     = a_have && !(k_last && out_left != '0);
  assign a_ready   = !a_have || (issue && j == JW'(BEAT_WORDS - 1));
  assign b_rd_addr = k;
  assign c_valid   = (out_left != '0);
  assign c_data    = out_buf[BEAT_W*out_idx +: BEAT_W];
  assign busy      = a_have || s1_valid || s2_valid || (out_left != '0) || (k != '0);

  for (genvar n = 0; n < BUFF_N; n++) begin : g_lane
    fp32_mul u_mul (.a(s1_a),   .b(b_rd_data[WORD_W*n +: WORD_W]), .y(prod[n]));
    fp32_add u_add (.a(acc[n]), .b(s2_prod[n]),                    .y(sum[n]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_reg    <= '0;
      a_have   <= 1'b0;
      j        <= '0;
      k        <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_a     <= '0;
      s2_valid <= 1'b0;
      s2_first <= 1'b0;
      s2_last  <= 1'b0;
      out_buf  <= '0;
      out_left <= '0;
      out_idx  <= '0;
      for (int n = 0; n < BUFF_N; n++) begin
        s2_prod[n] <= '0;
        acc[n]     <= '0;
      end
    end else begin
      // issue
      if (a_valid && a_ready) begin
        a_reg  <= a_data;
        a_have <= 1'b1;
      end else if (issue && j == JW'(BEAT_WORDS - 1)) begin
        a_have <= 1'b0;
      end
      s1_valid <= issue;
      if (issue) begin
        s1_a     <= a_reg[WORD_W*j +: WORD_W];
        s1_first <= (k == '0);
        s1_last  <= k_last;
        j        <= j + 1'b1;
        k        <= k_last ? '0 : k + 1'b1;
      end
      // multiply
      s2_valid <= s1_valid;
      if (s1_valid) begin
        s2_first <= s1_first;
        s2_last  <= s1_last;
        for (int n = 0; n < BUFF_N; n++) s2_prod[n] <= prod[n];
      end
      // add
      if (s2_valid) begin
        for (int n = 0; n < BUFF_N; n++) begin
          acc[n] <= s2_first ? s2_prod[n] : sum[n];
          if (s2_last) out_buf[WORD_W*n +: WORD_W] <= s2_first ? s2_prod[n] : sum[n];
        end
      end
      // output
      if (s2_valid && s2_last) begin
        out_left <= n_beats;
        out_idx  <= '0;
      end else if (c_valid && c_ready) begin
        out_left <= out_left - 1'b1;
        out_idx  <= out_idx + 1'b1;
      end
    end
  end

  // The output buffer is empty whenever a finished row is written into it.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   (s2_valid && s2_last) |-> (out_left == '0));

endmodule
