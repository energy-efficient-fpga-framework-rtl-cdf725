// tb_hls_kernel: self-checking test of the multiply-accumulate kernel with
// BUFF_K = 32 and BUFF_N = 32 (two output beats per row) against a real B
// tile buffer. A and B hold small non-zero integers, so every FP32 sum is
// exact and the expected row sums are formed in integer arithmetic. Three
// phases: rows offered with random gaps and a consumer with random ready; a
// slow consumer, which must make the kernel hold back a row's last step at
// least once; and full rate, where R rows must take at most R * BUFF_K clocks
// plus the pipeline depth.
module tb_hls_kernel;
  import tb_pkg::*;
  localparam int BUFF_K = 32, BUFF_N = 32, NB = BUFF_N / 16, KB = BUFF_K / 16;
  localparam int ROWS = 24;
  logic clk = 0, rst_n = 0;
  logic [$clog2(KB+1)-1:0] k_beats = KB;
  logic [$clog2(NB+1)-1:0] n_beats = NB;
  logic a_valid, a_ready, c_valid, c_ready, busy;
  logic [511:0] a_data, c_data;
  logic [$clog2(BUFF_K)-1:0] b_rd_addr;
  logic [BUFF_N*32-1:0] b_rd_data;
  logic wr_en;
  logic [$clog2(BUFF_K)-1:0] wr_addr;
  logic [$clog2(NB+1)-1:0] wr_beat;
  logic [511:0] wr_data;

  int A [ROWS][BUFF_K];
  int B [BUFF_K][BUFF_N];
  logic a_fire = 0;
  int checks = 0, failures = 0;
  int a_idx = 0, c_idx = 0, phase = 0, holds = 0;
  int a_rate_pct = 50, c_rate_pct = 50;
  longint t_first = -1, t_last = 0, cyc = 0;

  hls_kernel #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N)) dut (.*);
  bram_b #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N)) u_b (.clk, .wr_en, .wr_addr, .wr_beat, .wr_data,
                                                   .rd_addr(b_rd_addr), .rd_data(b_rd_data));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nz_small();
    int v = 1 + int'($urandom % 4);
    return ($urandom % 2) ? v : -v;
  endfunction

  // A side: a beat, once offered, stays until taken.
  always @(negedge clk) begin
    cyc++;
    if (rst_n && phase > 0) begin
      if (a_fire) a_idx++;
      if (!a_valid || a_fire) begin
        a_valid = (a_idx < limit_a()) && (($urandom % 100) < a_rate_pct);
        for (int w = 0; w < 16; w++)
          a_data[32*w +: 32] = i2f(A[(a_idx / KB) % ROWS][(a_idx % KB) * 16 + w]);
      end
      a_fire = a_valid && a_ready;
      if (a_fire && t_first < 0 && phase == 3) t_first = cyc;
    end
    // C side
    c_ready = ($urandom % 100) < c_rate_pct;
    if (rst_n && c_valid && c_ready) begin
      int row, b, s;
      row = c_idx / NB; b = c_idx % NB;
      for (int w = 0; w < 16; w++) begin
        s = 0;
        for (int k = 0; k < BUFF_K; k++) s += A[row][k] * B[k][16 * b + w];
        checks++;
        if (c_data[32*w +: 32] !== i2f(s)) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d col %0d got %h exp %h", row, 16*b+w, c_data[32*w +: 32], i2f(s));
        end
      end
      c_idx++;
      t_last = cyc;
    end
    if (dut.a_have && dut.k == BUFF_K - 1 && dut.out_left != 0) holds++;
  end

  function automatic int limit_a();
    return (phase == 1) ? 8 * KB : (phase == 2) ? 16 * KB : ROWS * KB;
  endfunction

  initial begin
    a_valid = 0; a_data = 0; c_ready = 0; wr_en = 0; wr_addr = 0; wr_beat = 0; wr_data = 0;
    foreach (A[m, k]) A[m][k] = nz_small();
    foreach (B[k, n]) B[k][n] = nz_small();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < BUFF_K; k++)
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = k; wr_beat = b;
        for (int w = 0; w < 16; w++) wr_data[32*w +: 32] = i2f(B[k][16*b + w]);
      end
    @(negedge clk) wr_en = 0;
    // phase 1: random gaps on both sides
    phase = 1;
    wait (c_idx == 8 * NB);
    // phase 2: slow consumer
    c_rate_pct = 3; a_rate_pct = 100; phase = 2;
    wait (c_idx == 16 * NB);
    checks++;
    if (holds == 0) begin failures++; $display("FAIL kernel never held back a row end"); end
    // phase 3: full rate
    @(negedge clk);
    c_rate_pct = 100; a_rate_pct = 100; phase = 3;
    wait (c_idx == ROWS * NB);
    repeat (5) @(posedge clk);
    checks++;
    if (t_last - t_first > (ROWS - 16) * BUFF_K + 6) begin
      failures++; $display("FAIL full-rate rows took %0d cycles", t_last - t_first);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL kernel still busy"); end
    $display("kernel: %0d rows, full-rate %0d rows in %0d cycles, %0d held row ends",
             ROWS, ROWS - 16, t_last - t_first, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
