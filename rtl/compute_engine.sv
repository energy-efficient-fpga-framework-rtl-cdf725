// compute_engine: FP32 matrix-multiply engine that the host framework uses for
// the convolutional and deconvolutional layers of a CNN, without quantizing
// any value.
//
// It computes C += A * B for row-major FP32 matrices in external memory:
// A is M x K, B is K x N, C is M x N. B is cut into BUFF_K x BUFF_N tiles. For
// each tile, in the order "column block n0 outer, k0 inner":
//   1. read_b copies the tile into the on-chip buffer bram_b;
//   2. a dataflow pass runs four concurrent processes joined by streams:
//      read_a  -> Stream_A     : A[m][k0 .. k0+BUFF_K-1] for every row m,
//      hls_kernel              : multiplies each such row by the tile,
//      read_c  -> Stream_C_in  : C[m][n0 .. n0+BUFF_N-1], the old values,
//      hls_kernel -> Stream_C_out -> write_c : adds old and new, writes C.
// The pass ends when write_c has written every row; then the next tile is
// loaded. After the last k0 of a column block, that block of C holds its full
// sum. M is streamed in full, so A's and C's slices never need to fit on chip.
//
// Control: pulse start with cfg_m/cfg_n/cfg_k and the beat addresses
// base_a/base_b/base_c of the three matrices held stable; busy is high until
// the one-cycle done pulse. cfg_n and cfg_k must be non-zero multiples of 16,
// so that every matrix row starts on a 512-bit beat; otherwise done comes at
// once with cfg_error high and memory is untouched. They need not be
// multiples of the tile: the last column block and the last k slice are
// simply narrower. cfg_m is free; cfg_m = 0 finishes at once.
//
// Memory: each matrix lives in its own set of banks, A_BANKS for A, B_BANKS
// for B and C_BANKS for C (C is read and written). Addresses count 512-bit
// beats; beat a of a matrix is in bank (a mod X_BANKS) at local address
// (a div X_BANKS), and base_a/base_b/base_c are global beat addresses. A
// mem_bank_split per matrix spreads the engine's single stream of requests
// over the banks and puts the responses back in order. Each bank's read port
// takes requests with req_valid/req_ready and returns data in order on
// resp_valid, which must be accepted; C's write port takes wr_valid/wr_ready.
//
// Timing: a pass costs about BUFF_K * BUFF_N / 16 clocks to load the B tile
// (plus memory stalls) and then max(M * BUFF_K, memory time) clocks for the
// dataflow region, since the kernel makes one k step, BUFF_N multiply-adds,
// per clock. The tile load is not overlapped with the previous pass.
// The tile/stream structure, the 512-bit width and the spreading of transfers
// over a parameterizable number of banks follow the design; tile sizes,
// stream depths, the loop order, the port protocol, the bank counts (1 by
// default), beat interleaving and the rule that N and K be multiples of 16
// are this implementation's choices. Start, done and busy
// are pulses/levels of this implementation's own control interface.
module compute_engine
  import ce_pkg::*;
#(
  parameter int unsigned BUFF_K   = 128,
  parameter int unsigned BUFF_N   = 16,
  parameter int unsigned A_DEPTH  = 8,
  parameter int unsigned CI_DEPTH = 8,
  parameter int unsigned CO_DEPTH = 4,
  parameter int unsigned A_BANKS  = 1,
  parameter int unsigned B_BANKS  = 1,
  parameter int unsigned C_BANKS  = 1,
  parameter int unsigned BANK_OUT = 16,
  parameter int unsigned ADDR_W   = 32,
  parameter int unsigned DIM_W    = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic                start,
  input  logic [DIM_W-1:0]    cfg_m,
  input  logic [DIM_W-1:0]    cfg_n,
  input  logic [DIM_W-1:0]    cfg_k,
  input  logic [ADDR_W-1:0]   base_a,
  input  logic [ADDR_W-1:0]   base_b,
  input  logic [ADDR_W-1:0]   base_c,
  output logic                busy,
  output logic                done,
  output logic                cfg_error,
  // banks holding A (beat a is in bank a mod A_BANKS at a div A_BANKS)
  output logic [A_BANKS-1:0]              a_req_valid,
  input  logic [A_BANKS-1:0]              a_req_ready,
  output logic [A_BANKS-1:0][ADDR_W-1:0]  a_req_addr,
  input  logic [A_BANKS-1:0]              a_resp_valid,
  input  logic [A_BANKS-1:0][BEAT_W-1:0]  a_resp_data,
  // banks holding B
  output logic [B_BANKS-1:0]              b_req_valid,
  input  logic [B_BANKS-1:0]              b_req_ready,
  output logic [B_BANKS-1:0][ADDR_W-1:0]  b_req_addr,
  input  logic [B_BANKS-1:0]              b_resp_valid,
  input  logic [B_BANKS-1:0][BEAT_W-1:0]  b_resp_data,
  // banks holding C (read and written)
  output logic [C_BANKS-1:0]              c_req_valid,
  input  logic [C_BANKS-1:0]              c_req_ready,
  output logic [C_BANKS-1:0][ADDR_W-1:0]  c_req_addr,
  input  logic [C_BANKS-1:0]              c_resp_valid,
  input  logic [C_BANKS-1:0][BEAT_W-1:0]  c_resp_data,
  output logic [C_BANKS-1:0]              c_wr_valid,
  input  logic [C_BANKS-1:0]              c_wr_ready,
  output logic [C_BANKS-1:0][ADDR_W-1:0]  c_wr_addr,
  output logic [C_BANKS-1:0][BEAT_W-1:0]  c_wr_data
);

  localparam int unsigned NB  = BUFF_N / BEAT_WORDS;
  localparam int unsigned KB  = BUFF_K / BEAT_WORDS;
  localparam int unsigned KW  = $clog2(BUFF_K);

  typedef enum logic [1:0] {S_IDLE, S_LOAD_B, S_RUN} state_t;
  state_t state;

  logic [DIM_W-1:0]  m_r, n_r, k_r, n0, k0;
  logic [ADDR_W-1:0] a_base_r, b_base_r;
  logic [ADDR_W-1:0] stride_a, stride_bc, b_tile, a_tile, c_tile;
  logic              rb_start, ra_start, rc_start, wc_start;
  logic              rb_busy, rb_done, ra_busy, ra_done, rc_busy, rc_done, wc_busy, wc_done;
  logic              k_busy;

  // Extent of the current tile in beats: the full tile, or what is left at
  // the right edge of B/C (N) and at the bottom edge of B (K).
  localparam int unsigned KBW = $clog2(KB + 1);
  localparam int unsigned NBW = $clog2(NB + 1);
  logic [DIM_W-1:0]  k_left_beats, n_left_beats;
  logic [KBW-1:0]    kb_cur;
  logic [NBW-1:0]    nb_cur;
  logic [$clog2(BUFF_K+1)-1:0] b_rows;

  assign k_left_beats = (k_r - k0) >> 4;
  assign n_left_beats = (n_r - n0) >> 4;
  assign kb_cur = (k_left_beats >= DIM_W'(KB)) ? KBW'(KB) : KBW'(k_left_beats);
  assign nb_cur = (n_left_beats >= DIM_W'(NB)) ? NBW'(NB) : NBW'(n_left_beats);
  assign b_rows = ($bits(b_rows))'(kb_cur) * ($bits(b_rows))'(BEAT_WORDS);

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      busy      <= 1'b0;
      done      <= 1'b0;
      cfg_error <= 1'b0;
      m_r       <= '0;
      n_r       <= '0;
      k_r       <= '0;
      n0        <= '0;
      k0        <= '0;
      a_base_r  <= '0;
      b_base_r  <= '0;
      stride_a  <= '0;
      stride_bc <= '0;
      b_tile    <= '0;
      a_tile    <= '0;
      c_tile    <= '0;
      rb_start  <= 1'b0;
      ra_start  <= 1'b0;
      rc_start  <= 1'b0;
      wc_start  <= 1'b0;
    end else begin
      done     <= 1'b0;
      rb_start <= 1'b0;
      ra_start <= 1'b0;
      rc_start <= 1'b0;
      wc_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            if (cfg_n == '0 || cfg_k == '0 ||
                cfg_n[3:0] != '0 || cfg_k[3:0] != '0) begin
              cfg_error <= 1'b1;
              done      <= 1'b1;
            end else if (cfg_m == '0) begin
              cfg_error <= 1'b0;
              done      <= 1'b1;
            end else begin
              cfg_error <= 1'b0;
              busy      <= 1'b1;
              m_r       <= cfg_m;
              n_r       <= cfg_n;
              k_r       <= cfg_k;
              a_base_r  <= base_a;
              b_base_r  <= base_b;
              stride_a  <= ADDR_W'(cfg_k / DIM_W'(BEAT_WORDS));
              stride_bc <= ADDR_W'(cfg_n / DIM_W'(BEAT_WORDS));
              n0        <= '0;
              k0        <= '0;
              b_tile    <= base_b;
              a_tile    <= base_a;
              c_tile    <= base_c;
              rb_start  <= 1'b1;
              state     <= S_LOAD_B;
            end
          end
        end
        S_LOAD_B: begin
          if (rb_done) begin
            ra_start <= 1'b1;
            rc_start <= 1'b1;
            wc_start <= 1'b1;
            state    <= S_RUN;
          end
        end
        S_RUN: begin
          if (wc_done) begin
            if (k0 + DIM_W'(BUFF_K) < k_r) begin
              k0       <= k0 + DIM_W'(BUFF_K);
              a_tile   <= a_tile + ADDR_W'(KB);
              b_tile   <= b_tile + stride_bc * ADDR_W'(BUFF_K);
              rb_start <= 1'b1;
              state    <= S_LOAD_B;
            end else if (n0 + DIM_W'(BUFF_N) < n_r) begin
              k0       <= '0;
              n0       <= n0 + DIM_W'(BUFF_N);
              a_tile   <= a_base_r;
              b_tile   <= b_base_r + ADDR_W'((n0 + DIM_W'(BUFF_N)) / DIM_W'(BEAT_WORDS));
              c_tile   <= c_tile + ADDR_W'(NB);
              rb_start <= 1'b1;
              state    <= S_LOAD_B;
            end else begin
              busy  <= 1'b0;
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- memory banks ----------------
  // Each engine port (e*) is spread over its matrix's banks by mem_bank_split.
  logic              ea_req_valid, ea_req_ready, ea_resp_valid;
  logic              eb_req_valid, eb_req_ready, eb_resp_valid;
  logic              ec_req_valid, ec_req_ready, ec_resp_valid, ec_wr_valid, ec_wr_ready;
  logic [ADDR_W-1:0] ea_req_addr, eb_req_addr, ec_req_addr, ec_wr_addr;
  logic [BEAT_W-1:0] ea_resp_data, eb_resp_data, ec_wr_data;
  logic [BEAT_W-1:0] ec_resp_data;
  // A and B are only read: their splitters' write sides are tied off.
  logic                         a_unused_wr_ready, b_unused_wr_ready;
  logic [A_BANKS-1:0]           a_unused_wr_valid;
  logic [B_BANKS-1:0]           b_unused_wr_valid;
  logic [A_BANKS-1:0][ADDR_W-1:0] a_unused_wr_addr;
  logic [B_BANKS-1:0][ADDR_W-1:0] b_unused_wr_addr;
  logic [A_BANKS-1:0][BEAT_W-1:0] a_unused_wr_data;
  logic [B_BANKS-1:0][BEAT_W-1:0] b_unused_wr_data;

  mem_bank_split #(.BANKS(A_BANKS), .MAX_OUT(BANK_OUT), .ADDR_W(ADDR_W)) u_banks_a (
    .clk, .rst_n,
    .req_valid(ea_req_valid), .req_ready(ea_req_ready), .req_addr(ea_req_addr),
    .resp_valid(ea_resp_valid), .resp_data(ea_resp_data),
    .wr_valid(1'b0), .wr_ready(a_unused_wr_ready), .wr_addr('0), .wr_data('0),
    .bk_req_valid(a_req_valid), .bk_req_ready(a_req_ready), .bk_req_addr(a_req_addr),
    .bk_resp_valid(a_resp_valid), .bk_resp_data(a_resp_data),
    .bk_wr_valid(a_unused_wr_valid), .bk_wr_ready('0), .bk_wr_addr(a_unused_wr_addr), .bk_wr_data(a_unused_wr_data));

  mem_bank_split #(.BANKS(B_BANKS), .MAX_OUT(BANK_OUT), .ADDR_W(ADDR_W)) u_banks_b (
    .clk, .rst_n,
    .req_valid(eb_req_valid), .req_ready(eb_req_ready), .req_addr(eb_req_addr),
    .resp_valid(eb_resp_valid), .resp_data(eb_resp_data),
    .wr_valid(1'b0), .wr_ready(b_unused_wr_ready), .wr_addr('0), .wr_data('0),
    .bk_req_valid(b_req_valid), .bk_req_ready(b_req_ready), .bk_req_addr(b_req_addr),
    .bk_resp_valid(b_resp_valid), .bk_resp_data(b_resp_data),
    .bk_wr_valid(b_unused_wr_valid), .bk_wr_ready('0), .bk_wr_addr(b_unused_wr_addr), .bk_wr_data(b_unused_wr_data));

  mem_bank_split #(.BANKS(C_BANKS), .MAX_OUT(BANK_OUT), .ADDR_W(ADDR_W)) u_banks_c (
    .clk, .rst_n,
    .req_valid(ec_req_valid), .req_ready(ec_req_ready), .req_addr(ec_req_addr),
    .resp_valid(ec_resp_valid), .resp_data(ec_resp_data),
    .wr_valid(ec_wr_valid), .wr_ready(ec_wr_ready), .wr_addr(ec_wr_addr), .wr_data(ec_wr_data),
    .bk_req_valid(c_req_valid), .bk_req_ready(c_req_ready), .bk_req_addr(c_req_addr),
    .bk_resp_valid(c_resp_valid), .bk_resp_data(c_resp_data),
    .bk_wr_valid(c_wr_valid), .bk_wr_ready(c_wr_ready), .bk_wr_addr(c_wr_addr), .bk_wr_data(c_wr_data));

  // ---------------- Read B and BRAM_B ----------------
  logic                             bw_en;
  logic [KW-1:0]                    bw_addr, br_addr;
  logic [$clog2(NB+1)-1:0]          bw_beat;
  logic [BEAT_W-1:0]                bw_data;
  logic [BUFF_N*WORD_W-1:0]         br_data;

  read_b #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N), .ADDR_W(ADDR_W)) u_read_b (
    .clk, .rst_n, .start(rb_start), .base(b_tile), .stride(stride_bc),
    .rows(b_rows), .row_beats(nb_cur),
    .busy(rb_busy), .done(rb_done),
    .req_valid(eb_req_valid), .req_ready(eb_req_ready), .req_addr(eb_req_addr),
    .resp_valid(eb_resp_valid), .resp_data(eb_resp_data),
    .wr_en(bw_en), .wr_addr(bw_addr), .wr_beat(bw_beat), .wr_data(bw_data));

  bram_b #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N)) u_bram_b (
    .clk, .wr_en(bw_en), .wr_addr(bw_addr), .wr_beat(bw_beat), .wr_data(bw_data),
    .rd_addr(br_addr), .rd_data(br_data));

  // ---------------- Read A -> Stream_A ----------------
  logic                         sa_in_valid, sa_in_ready, sa_out_valid, sa_out_ready;
  logic [BEAT_W-1:0]            sa_in_data, sa_out_data;
  logic [$clog2(A_DEPTH+1)-1:0] sa_count;

  read_a #(.ROW_BEATS(KB), .DEPTH(A_DEPTH), .ADDR_W(ADDR_W), .DIM_W(DIM_W)) u_read_a (
    .clk, .rst_n, .start(ra_start), .base(a_tile), .stride(stride_a), .rows(m_r), .row_beats(kb_cur),
    .busy(ra_busy), .done(ra_done),
    .req_valid(ea_req_valid), .req_ready(ea_req_ready), .req_addr(ea_req_addr),
    .resp_valid(ea_resp_valid), .resp_data(ea_resp_data),
    .out_valid(sa_in_valid), .out_data(sa_in_data), .stream_count(sa_count));

  hls_stream #(.W(BEAT_W), .DEPTH(A_DEPTH)) u_stream_a (
    .clk, .rst_n, .in_valid(sa_in_valid), .in_ready(sa_in_ready), .in_data(sa_in_data),
    .out_valid(sa_out_valid), .out_ready(sa_out_ready), .out_data(sa_out_data),
    .count(sa_count));

  // ---------------- Innovative HLS Kernel -> Stream_C_out ----------------
  logic                          co_in_valid, co_in_ready, co_out_valid, co_out_ready;
  logic [BEAT_W-1:0]             co_in_data, co_out_data;
  logic [$clog2(CO_DEPTH+1)-1:0] co_count;

  hls_kernel #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N)) u_kernel (
    .clk, .rst_n, .k_beats(kb_cur), .n_beats(nb_cur),
    .a_valid(sa_out_valid), .a_ready(sa_out_ready), .a_data(sa_out_data),
    .b_rd_addr(br_addr), .b_rd_data(br_data),
    .c_valid(co_in_valid), .c_ready(co_in_ready), .c_data(co_in_data),
    .busy(k_busy));

  hls_stream #(.W(BEAT_W), .DEPTH(CO_DEPTH)) u_stream_c_out (
    .clk, .rst_n, .in_valid(co_in_valid), .in_ready(co_in_ready), .in_data(co_in_data),
    .out_valid(co_out_valid), .out_ready(co_out_ready), .out_data(co_out_data),
    .count(co_count));

  // ---------------- Read C -> Stream_C_in ----------------
  logic                          ci_in_valid, ci_in_ready, ci_out_valid, ci_out_ready;
  logic [BEAT_W-1:0]             ci_in_data, ci_out_data;
  logic [$clog2(CI_DEPTH+1)-1:0] ci_count;

  read_c #(.ROW_BEATS(NB), .DEPTH(CI_DEPTH), .ADDR_W(ADDR_W), .DIM_W(DIM_W)) u_read_c (
    .clk, .rst_n, .start(rc_start), .base(c_tile), .stride(stride_bc), .rows(m_r),
    .row_beats(nb_cur),
    .busy(rc_busy), .done(rc_done),
    .req_valid(ec_req_valid), .req_ready(ec_req_ready), .req_addr(ec_req_addr),
    .resp_valid(ec_resp_valid), .resp_data(ec_resp_data),
    .out_valid(ci_in_valid), .out_data(ci_in_data), .stream_count(ci_count));

  hls_stream #(.W(BEAT_W), .DEPTH(CI_DEPTH)) u_stream_c_in (
    .clk, .rst_n, .in_valid(ci_in_valid), .in_ready(ci_in_ready), .in_data(ci_in_data),
    .out_valid(ci_out_valid), .out_ready(ci_out_ready), .out_data(ci_out_data),
    .count(ci_count));

  // ---------------- Write C ----------------
  write_c #(.BUFF_N(BUFF_N), .ADDR_W(ADDR_W), .DIM_W(DIM_W)) u_write_c (
    .clk, .rst_n, .start(wc_start), .base(c_tile), .stride(stride_bc), .rows(m_r),
    .row_beats(nb_cur),
    .busy(wc_busy), .done(wc_done),
    .cin_valid(ci_out_valid), .cin_ready(ci_out_ready), .cin_data(ci_out_data),
    .cout_valid(co_out_valid), .cout_ready(co_out_ready), .cout_data(co_out_data),
    .wr_valid(ec_wr_valid), .wr_ready(ec_wr_ready), .wr_addr(ec_wr_addr), .wr_data(ec_wr_data));

  // ---------------- checks ----------------
  // The readers guarantee room, so a stream is never written while full.
  a_sa_room: assert property (@(posedge clk) disable iff (!rst_n) sa_in_valid |-> sa_in_ready);
  a_ci_room: assert property (@(posedge clk) disable iff (!rst_n) ci_in_valid |-> ci_in_ready);
  // B is only reloaded while the dataflow pass is idle.
  a_b_quiet: assert property (@(posedge clk) disable iff (!rst_n)
                              rb_busy |-> !(ra_busy || rc_busy || wc_busy));

  // When write_c finishes a pass, every process of the pass has finished.
  a_pass_drained: assert property (@(posedge clk) disable iff (!rst_n)
                                   wc_done |-> !(k_busy || ra_busy || rc_busy));

  // Compile-time rules on the tile shape.
  if (BUFF_N % BEAT_WORDS != 0 || BUFF_K % BEAT_WORDS != 0 || BUFF_N == 0 || BUFF_K == 0)
  begin : g_bad_shape
    $error("BUFF_N and BUFF_K must be non-zero multiples of 16");
  end

endmodule
