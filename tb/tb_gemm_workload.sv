// tb_gemm_workload: the product the engine is evaluated on (M = 2048,
// K = 4096, N = 16384, FP32) scaled down by 16 in every dimension to
// M = 128, K = 256, N = 1024, with random FP32 data, on the engine at its
// default parameters (one memory bank per matrix): 64 column blocks of two
// k slices each.
//
// A and B hold random values of magnitude 0.5 .. 2 with random signs, C holds
// random start values, so C := C + A * B. The expected result is formed with
// the engine's own rounding order: for each element, the products are rounded
// to FP32 and summed in increasing k order with a rounding after every add,
// separately for each k slice of BUFF_K values; each slice's sum is then
// added to C as it stands after the previous slice. Each product and each sum is formed
// exactly in double precision and rounded once to FP32 (for these magnitudes
// the exact sum of two FP32 values always fits a double), so every one of the
// 131072 results of C must match bit for bit.
//
// Timing: the kernel does one k step per clock, so the 128 passes need at
// least 128 * M * BUFF_K = 2097152 clocks. The test also requires the run to
// stay within 25% of that plus the 128 tile loads (BUFF_K clocks each), i.e.
// that the memory side keeps the kernel busy.
module tb_gemm_workload;
  import tb_pkg::*;
  localparam int BUFF_K = 128, BUFF_N = 16;
  localparam int M = 128, K = 256, N = 1024;
  localparam int SZ_A = M * K / 16, SZ_B = K * N / 16, SZ_C = M * N / 16;
  localparam longint WATCHDOG = 4_000_000;

  logic clk = 0, rst_n = 0, start = 0, busy, done, cfg_error;
  logic [31:0] cfg_m, cfg_n, cfg_k, base_a, base_b, base_c;
  logic a_req_valid, a_req_ready, a_resp_valid, b_req_valid, b_req_ready, b_resp_valid;
  logic c_req_valid, c_req_ready, c_resp_valid, c_wr_valid, c_wr_ready;
  logic [31:0] a_req_addr, b_req_addr, c_req_addr, c_wr_addr;
  logic [511:0] a_resp_data, b_resp_data, c_resp_data, c_wr_data;

  compute_engine dut (.*);

  tb_mem_model #(.SIZE(SZ_A), .LAT(8), .READY_PCT(75)) u_ma (.clk,
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req_addr(a_req_addr),
    .resp_valid(a_resp_valid), .resp_data(a_resp_data),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));
  tb_mem_model #(.SIZE(SZ_B), .LAT(8), .READY_PCT(75)) u_mb (.clk,
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .resp_valid(b_resp_valid), .resp_data(b_resp_data),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));
  tb_mem_model #(.SIZE(SZ_C), .LAT(8), .READY_PCT(75)) u_mc (.clk,
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req_addr(c_req_addr),
    .resp_valid(c_resp_valid), .resp_data(c_resp_data),
    .wr_valid(c_wr_valid), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data));

  logic [31:0] A [M][K];
  logic [31:0] B [K][N];
  logic [31:0] C0 [M][N];
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) cyc++;

  // random FP32 value in [0.5, 2) with a random sign
  function automatic logic [31:0] rnd();
    return {1'($urandom), 8'(126 + $urandom % 2), 23'($urandom)};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return d2f($realtobits($bitstoreal(f2d(a)) * $bitstoreal(f2d(b))));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return d2f($realtobits($bitstoreal(f2d(a)) + $bitstoreal(f2d(b))));
  endfunction

  initial begin
    longint t0, t_run, ideal;
    logic [31:0] p, e, got;
    base_a = 0; base_b = 0; base_c = 0;
    cfg_m = 0; cfg_n = 0; cfg_k = 0;
    foreach (A[i, j]) A[i][j] = rnd();
    foreach (B[i, j]) B[i][j] = rnd();
    foreach (C0[i, j]) C0[i][j] = rnd();
    for (int i = 0; i < M; i++)
      for (int j = 0; j < K; j++) u_ma.mem[(i * K + j) / 16][32 * ((i * K + j) % 16) +: 32] = A[i][j];
    for (int i = 0; i < K; i++)
      for (int j = 0; j < N; j++) u_mb.mem[(i * N + j) / 16][32 * ((i * N + j) % 16) +: 32] = B[i][j];
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) u_mc.mem[(i * N + j) / 16][32 * ((i * N + j) % 16) +: 32] = C0[i][j];
    repeat (3) @(posedge clk);
    rst_n = 1;

    @(negedge clk);
    cfg_m = M; cfg_n = N; cfg_k = K; start = 1; t0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    t_run = cyc - t0;
    checks++;
    if (cfg_error) begin failures++; $display("FAIL shape refused"); end

    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        e = C0[i][j];
        for (int k0 = 0; k0 < K; k0 += BUFF_K) begin
          p = fmul(A[i][k0], B[k0][j]);
          for (int k = k0 + 1; k < k0 + BUFF_K; k++) p = fadd(p, fmul(A[i][k], B[k][j]));
          e = fadd(e, p);
        end
        got = u_mc.mem[(i * N + j) / 16][32 * ((i * N + j) % 16) +: 32];
        checks++;
        if (got !== e) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] got %h exp %h", i, j, got, e);
        end
      end

    ideal = longint'(N / BUFF_N) * (K / BUFF_K) * M * BUFF_K;
    $display("workload: M=%0d K=%0d N=%0d in %0d clocks, kernel-bound minimum %0d (%0d%%)",
             M, K, N, t_run, ideal, 100 * ideal / t_run);
    checks++;
    if (t_run < ideal) begin failures++; $display("FAIL faster than the kernel can run"); end
    checks++;
    if (t_run * 4 > 5 * (ideal + longint'(N / BUFF_N) * (K / BUFF_K) * BUFF_K)) begin
      failures++; $display("FAIL kernel starved by memory");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
