// tb_compute_engine_full: the end-to-end test of tb_compute_engine run on the
// engine exactly as built, every parameter at its default (BUFF_K = 128,
// BUFF_N = 16, stream depths 8/8/4, one memory bank per matrix). One
// multiply of M = 6, N = 32, K = 272 covers two column blocks and three k
// slices (the last only 16 deep), so it exercises the same mechanisms: B tile reloads, accumulation across passes, a move to the next
// column block, full streams, memory stalls, plus the refused shape and the
// empty run. One exception: at the default sizes the kernel emits one
// Stream_C_out beat per 128 clocks, far slower than any write-back here, so
// that stream filling up is reported but not required (tb_compute_engine
// forces it with smaller tiles). Expected values are formed in integer
// arithmetic.
module tb_compute_engine_full;
  import tb_pkg::*;
  localparam int BUFF_K = 128, BUFF_N = 16;
  localparam int M = 6, N = 32, K = 272;
  localparam int BASE_A = 0, BASE_B = 0, BASE_C = 8;
  localparam int SZ_A = M * K / 16, SZ_B = K * N / 16, SZ_C = BASE_C + M * N / 16 + 8;
  localparam longint WATCHDOG = 200000;

  logic clk = 0, rst_n = 0, start = 0, busy, done, cfg_error;
  logic [31:0] cfg_m, cfg_n, cfg_k, base_a, base_b, base_c;
  logic a_req_valid, a_req_ready, a_resp_valid, b_req_valid, b_req_ready, b_resp_valid;
  logic c_req_valid, c_req_ready, c_resp_valid, c_wr_valid, c_wr_ready;
  logic [31:0] a_req_addr, b_req_addr, c_req_addr, c_wr_addr;
  logic [511:0] a_resp_data, b_resp_data, c_resp_data, c_wr_data;

  compute_engine dut (.*);

  tb_mem_model #(.SIZE(SZ_A), .LAT(6), .READY_PCT(75)) u_ma (.clk,
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req_addr(a_req_addr),
    .resp_valid(a_resp_valid), .resp_data(a_resp_data),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));
  tb_mem_model #(.SIZE(SZ_B), .LAT(6), .READY_PCT(75)) u_mb (.clk,
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .resp_valid(b_resp_valid), .resp_data(b_resp_data),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));
  tb_mem_model #(.SIZE(SZ_C), .LAT(6), .READY_PCT(40)) u_mc (.clk,
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req_addr(c_req_addr),
    .resp_valid(c_resp_valid), .resp_data(c_resp_data),
    .wr_valid(c_wr_valid), .wr_ready(c_wr_ready), .wr_addr(c_wr_addr), .wr_data(c_wr_data));

  int A [M][K];
  int B [K][N];
  int C0 [M][N];
  int checks = 0, failures = 0;
  int n_edge = 0, n_loads = 0, n_accum = 0, n_colblk = 0, n_sa_full = 0, n_co_full = 0, n_err = 0, n_empty = 0;
  longint cyc = 0, t_run = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (dut.rb_start) n_loads++;
    if (dut.ra_start && (dut.kb_cur != BUFF_K / 16 || dut.nb_cur != BUFF_N / 16)) n_edge++;
    if (dut.ra_start && dut.k0 != 0) n_accum++;
    if (dut.rb_start && dut.n0 != 0 && dut.k0 == 0) n_colblk++;
    if (dut.sa_count == 8) n_sa_full++;
    if (dut.co_count == 4) n_co_full++;
  end

  function automatic int nz(int r);
    int v = 1 + int'($urandom % r);
    return ($urandom % 2) ? v : -v;
  endfunction

  task automatic run(input int m, input int n, input int k, output logic err, output longint cycles);
    longint t0;
    @(negedge clk);
    cfg_m = m; cfg_n = n; cfg_k = k; start = 1; t0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    err = cfg_error;
    cycles = cyc - t0;
  endtask

  initial begin
    logic err;
    longint cycles;
    int s;
    base_a = BASE_A; base_b = BASE_B; base_c = BASE_C;
    cfg_m = 0; cfg_n = 0; cfg_k = 0;
    foreach (A[i, j]) A[i][j] = nz(3);
    foreach (B[i, j]) B[i][j] = nz(3);
    foreach (C0[i, j]) C0[i][j] = int'($urandom % 201) - 100;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < K; j++) u_ma.mem[BASE_A + (i * K + j) / 16][32 * ((i * K + j) % 16) +: 32] = i2f(A[i][j]);
    for (int i = 0; i < K; i++)
      for (int j = 0; j < N; j++) u_mb.mem[BASE_B + (i * N + j) / 16][32 * ((i * N + j) % 16) +: 32] = i2f(B[i][j]);
    for (int i = 0; i < SZ_C; i++) u_mc.mem[i] = {16{32'h7F80_0001}};   // NaN guard pattern
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) u_mc.mem[BASE_C + (i * N + j) / 16][32 * ((i * N + j) % 16) +: 32] = i2f(C0[i][j]);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. the multiply
    run(M, N, K, err, cycles);
    t_run = cycles;
    checks++;
    if (err || busy) begin failures++; $display("FAIL run 1 error=%b", err); end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        s = C0[i][j];
        for (int k = 0; k < K; k++) s += A[i][k] * B[k][j];
        checks++;
        if (u_mc.mem[BASE_C + (i * N + j) / 16][32 * ((i * N + j) % 16) +: 32] !== i2f(s)) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] got %h exp %h (%0d)", i, j,
                                      u_mc.mem[BASE_C + (i * N + j) / 16][32 * ((i * N + j) % 16) +: 32], i2f(s), s);
        end
      end
    for (int i = 0; i < SZ_C; i++)
      if (i < BASE_C || i >= BASE_C + M * N / 16) begin
        checks++;
        if (u_mc.mem[i] !== {16{32'h7F80_0001}}) begin failures++; $display("FAIL stray write %0d", i); end
      end
    checks++;
    if (u_ma.bad_addr + u_mb.bad_addr + u_mc.bad_addr != 0) begin failures++; $display("FAIL address out of range"); end
    // the kernel needs at least M * BUFF_K clocks per pass
    checks++;
    if (t_run < (N / BUFF_N) * (K / BUFF_K) * M * BUFF_K) begin failures++; $display("FAIL too fast"); end

    // 2. bad shape
    run(M, N + 8, K, err, cycles);
    checks++;
    if (!err || cycles > 3) begin failures++; $display("FAIL bad shape not refused"); end
    else n_err++;
    // 3. empty
    run(0, N, K, err, cycles);
    checks++;
    if (err || cycles > 3) begin failures++; $display("FAIL empty run"); end
    else n_empty++;

    $display("engine: M=%0d N=%0d K=%0d in %0d cycles; edge passes %0d, B loads %0d, accumulating passes %0d, column blocks %0d,",
             M, N, K, t_run, n_edge, n_loads, n_accum, n_colblk);
    $display("        Stream_A full %0d, Stream_C_out full %0d, memory stalls A/B/C %0d/%0d/%0d, cfg errors %0d, empty runs %0d",
             n_sa_full, n_co_full, u_ma.stall_cycles, u_mb.stall_cycles, u_mc.stall_cycles, n_err, n_empty);
    checks++; if (n_loads != ((N + BUFF_N - 1) / BUFF_N) * ((K + BUFF_K - 1) / BUFF_K)) begin failures++; $display("FAIL B loads"); end
    checks++; if (n_edge == 0)    begin failures++; $display("FAIL no edge tile"); end
    checks++; if (n_accum == 0)   begin failures++; $display("FAIL no accumulating pass"); end
    checks++; if (n_colblk == 0)  begin failures++; $display("FAIL no column block change"); end
    checks++; if (n_sa_full == 0) begin failures++; $display("FAIL Stream_A never full"); end
    checks++; if (u_ma.stall_cycles + u_mb.stall_cycles + u_mc.stall_cycles == 0) begin failures++; $display("FAIL no memory stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
