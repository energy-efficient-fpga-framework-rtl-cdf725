// tb_compute_engine: end-to-end test of the GEMM engine, C += A * B, with
// memory bank models that stall requests and writes at random: A and C are
// each spread over two banks (even beats in bank 0, odd beats in bank 1, the
// two with different latencies), B sits in one bank. Reduced tile sizes
// (BUFF_K = 32, BUFF_N = 32) and small streams keep it short. Operations:
//   1. M = 5, N = 80, K = 80: three column blocks times three k slices, the
//      last of each only 16 wide, so C is accumulated across passes and the
//      edge tiles are exercised; every element of C is checked against
//      C0 + A*B formed in integer arithmetic (small integers, exact in FP32);
//   2. N = 88, not a multiple of 16: must end at once with cfg_error set
//      and leave memory untouched;
//   3. M = 0: must end at once without error.
// It counts how often each mechanism of the design occurs and fails if one
// never does: B tile reloads, passes that accumulate onto a partial C, moves
// to the next column block, a full Stream_A (reader throttled), a full
// Stream_C_out (kernel held back by write-back), memory stalls, the
// configuration error, the empty run, and requests reaching every bank.
module tb_compute_engine;
  import tb_pkg::*;
  localparam int BUFF_K = 32, BUFF_N = 32;
  localparam int M = 5, N = 80, K = 80;
  localparam int BASE_A = 0, BASE_B = 0, BASE_C = 8;
  localparam int SZ_A = M * K / 16, SZ_B = K * N / 16, SZ_C = BASE_C + M * N / 16 + 8;
  localparam int HA = SZ_A / 2 + 1, HC = SZ_C / 2 + 1;   // bank sizes for A and C
  localparam longint WATCHDOG = 200000;

  logic clk = 0, rst_n = 0, start = 0, busy, done, cfg_error;
  logic [31:0] cfg_m, cfg_n, cfg_k, base_a, base_b, base_c;
  logic b_req_valid, b_req_ready, b_resp_valid;
  logic [1:0] a_req_valid, a_req_ready, a_resp_valid;
  logic [1:0] c_req_valid, c_req_ready, c_resp_valid, c_wr_valid, c_wr_ready;
  logic [31:0] b_req_addr;
  logic [1:0][31:0] a_req_addr, c_req_addr, c_wr_addr;
  logic [511:0] b_resp_data;
  logic [1:0][511:0] a_resp_data, c_resp_data, c_wr_data;

  compute_engine #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N), .A_DEPTH(4), .CI_DEPTH(4), .CO_DEPTH(2),
                   .A_BANKS(2), .B_BANKS(1), .C_BANKS(2), .BANK_OUT(8)) dut (.*);

  tb_mem_model #(.SIZE(HA), .LAT(6), .READY_PCT(75)) u_ma0 (.clk,
    .req_valid(a_req_valid[0]), .req_ready(a_req_ready[0]), .req_addr(a_req_addr[0]),
    .resp_valid(a_resp_valid[0]), .resp_data(a_resp_data[0]),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));
  tb_mem_model #(.SIZE(HA), .LAT(3), .READY_PCT(75)) u_ma1 (.clk,
    .req_valid(a_req_valid[1]), .req_ready(a_req_ready[1]), .req_addr(a_req_addr[1]),
    .resp_valid(a_resp_valid[1]), .resp_data(a_resp_data[1]),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));
  tb_mem_model #(.SIZE(SZ_B), .LAT(6), .READY_PCT(75)) u_mb (.clk,
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .resp_valid(b_resp_valid), .resp_data(b_resp_data),
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));
  tb_mem_model #(.SIZE(HC), .LAT(6), .READY_PCT(40)) u_mc0 (.clk,
    .req_valid(c_req_valid[0]), .req_ready(c_req_ready[0]), .req_addr(c_req_addr[0]),
    .resp_valid(c_resp_valid[0]), .resp_data(c_resp_data[0]),
    .wr_valid(c_wr_valid[0]), .wr_ready(c_wr_ready[0]), .wr_addr(c_wr_addr[0]), .wr_data(c_wr_data[0]));
  tb_mem_model #(.SIZE(HC), .LAT(9), .READY_PCT(40)) u_mc1 (.clk,
    .req_valid(c_req_valid[1]), .req_ready(c_req_ready[1]), .req_addr(c_req_addr[1]),
    .resp_valid(c_resp_valid[1]), .resp_data(c_resp_data[1]),
    .wr_valid(c_wr_valid[1]), .wr_ready(c_wr_ready[1]), .wr_addr(c_wr_addr[1]), .wr_data(c_wr_data[1]));

  // Word access to the two-bank matrices by global beat address.
  task automatic put_a(input int beat, input int w, input logic [31:0] v);
    if (beat % 2 == 0) u_ma0.mem[beat / 2][32 * w +: 32] = v;
    else               u_ma1.mem[beat / 2][32 * w +: 32] = v;
  endtask
  task automatic put_c(input int beat, input logic [511:0] v);
    if (beat % 2 == 0) u_mc0.mem[beat / 2] = v;
    else               u_mc1.mem[beat / 2] = v;
  endtask
  function automatic logic [511:0] get_c(input int beat);
    return (beat % 2 == 0) ? u_mc0.mem[beat / 2] : u_mc1.mem[beat / 2];
  endfunction

  int A [M][K];
  int B [K][N];
  int C0 [M][N];
  int checks = 0, failures = 0;
  int n_bank[4] = '{0, 0, 0, 0};
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
    for (int b = 0; b < 2; b++) begin
      if (a_req_valid[b] && a_req_ready[b]) n_bank[b]++;
      if (c_req_valid[b] && c_req_ready[b]) n_bank[2 + b]++;
    end
    if (dut.ra_start && (dut.kb_cur != BUFF_K / 16 || dut.nb_cur != BUFF_N / 16)) n_edge++;
    if (dut.ra_start && dut.k0 != 0) n_accum++;
    if (dut.rb_start && dut.n0 != 0 && dut.k0 == 0) n_colblk++;
    if (dut.sa_count == 4) n_sa_full++;
    if (dut.co_count == 2) n_co_full++;
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
      for (int j = 0; j < K; j++) put_a(BASE_A + (i * K + j) / 16, (i * K + j) % 16, i2f(A[i][j]));
    for (int i = 0; i < K; i++)
      for (int j = 0; j < N; j++) u_mb.mem[BASE_B + (i * N + j) / 16][32 * ((i * N + j) % 16) +: 32] = i2f(B[i][j]);
    for (int i = 0; i < SZ_C; i++) put_c(i, {16{32'h7F80_0001}});   // NaN guard pattern
    for (int i = 0; i < M * N / 16; i++) begin
      logic [511:0] v;
      for (int w = 0; w < 16; w++) v[32 * w +: 32] = i2f(C0[(i * 16 + w) / N][(i * 16 + w) % N]);
      put_c(BASE_C + i, v);
    end
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
        if (get_c(BASE_C + (i * N + j) / 16)[32 * ((i * N + j) % 16) +: 32] !== i2f(s)) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] got %h exp %h (%0d)", i, j,
                                      get_c(BASE_C + (i * N + j) / 16)[32 * ((i * N + j) % 16) +: 32], i2f(s), s);
        end
      end
    for (int i = 0; i < SZ_C; i++)
      if (i < BASE_C || i >= BASE_C + M * N / 16) begin
        checks++;
        if (get_c(i) !== {16{32'h7F80_0001}}) begin failures++; $display("FAIL stray write %0d", i); end
      end
    checks++;
    if (u_ma0.bad_addr + u_ma1.bad_addr + u_mb.bad_addr + u_mc0.bad_addr + u_mc1.bad_addr != 0) begin failures++; $display("FAIL address out of range"); end
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
    $display("        Stream_A full %0d, Stream_C_out full %0d, memory stalls A/B/C %0d/%0d/%0d, cfg errors %0d, empty runs %0d,",
             n_sa_full, n_co_full, u_ma0.stall_cycles + u_ma1.stall_cycles, u_mb.stall_cycles,
             u_mc0.stall_cycles + u_mc1.stall_cycles, n_err, n_empty);
    $display("        reads per bank A0/A1/C0/C1 %0d/%0d/%0d/%0d", n_bank[0], n_bank[1], n_bank[2], n_bank[3]);
    checks++; if (n_loads != ((N + BUFF_N - 1) / BUFF_N) * ((K + BUFF_K - 1) / BUFF_K)) begin failures++; $display("FAIL B loads"); end
    checks++; if (n_edge == 0)    begin failures++; $display("FAIL no edge tile"); end
    checks++; if (n_accum == 0)   begin failures++; $display("FAIL no accumulating pass"); end
    checks++; if (n_colblk == 0)  begin failures++; $display("FAIL no column block change"); end
    checks++; if (n_sa_full == 0) begin failures++; $display("FAIL Stream_A never full"); end
    checks++; if (n_co_full == 0) begin failures++; $display("FAIL Stream_C_out never full"); end
    checks++; if (n_bank[0] == 0 || n_bank[1] == 0 || n_bank[2] == 0 || n_bank[3] == 0) begin failures++; $display("FAIL a bank never used"); end
    checks++; if (u_ma0.stall_cycles + u_mb.stall_cycles + u_mc0.stall_cycles == 0) begin failures++; $display("FAIL no memory stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
