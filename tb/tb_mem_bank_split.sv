// tb_mem_bank_split: self-checking test of the bank splitter with 3 banks of
// different latencies (2, 9 and 4 cycles) and random ready. Each bank holds
// a pattern derived from the global beat address it stores. Phase 1 sends
// 400 reads to random addresses at random times; every response must carry
// the pattern of its own request, in request order, and no bank may get a
// request for an address it does not own. Phase 2 reads 300 consecutive
// beats at full rate; each bank takes at most one request per 3 cycles (and
// is ready only 80% of the rest), so one bank alone would need 900 cycles;
// the split port must finish in fewer than 600. Phase 3 writes 200 random
// beats and checks that each landed in the right bank at the right local
// address.
module tb_mem_bank_split;
  localparam int BANKS = 3, SZ = 256;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid, wr_valid, wr_ready;
  logic [31:0] req_addr, wr_addr;
  logic [511:0] resp_data, wr_data;
  logic [BANKS-1:0] bk_req_valid, bk_req_ready, bk_resp_valid, bk_wr_valid, bk_wr_ready;
  logic [BANKS-1:0][31:0] bk_req_addr, bk_wr_addr;
  logic [BANKS-1:0][511:0] bk_resp_data, bk_wr_data;
  int checks = 0, failures = 0, sent = 0, got = 0, cyc = 0;
  logic [31:0] expq [$];

  mem_bank_split #(.BANKS(BANKS), .MAX_OUT(8)) dut (.*);

  tb_mem_model #(.SIZE(SZ), .LAT(2), .READY_PCT(80), .MIN_GAP(2)) u_m0 (.clk,
    .req_valid(bk_req_valid[0]), .req_ready(bk_req_ready[0]), .req_addr(bk_req_addr[0]),
    .resp_valid(bk_resp_valid[0]), .resp_data(bk_resp_data[0]),
    .wr_valid(bk_wr_valid[0]), .wr_ready(bk_wr_ready[0]), .wr_addr(bk_wr_addr[0]), .wr_data(bk_wr_data[0]));
  tb_mem_model #(.SIZE(SZ), .LAT(9), .READY_PCT(80), .MIN_GAP(2)) u_m1 (.clk,
    .req_valid(bk_req_valid[1]), .req_ready(bk_req_ready[1]), .req_addr(bk_req_addr[1]),
    .resp_valid(bk_resp_valid[1]), .resp_data(bk_resp_data[1]),
    .wr_valid(bk_wr_valid[1]), .wr_ready(bk_wr_ready[1]), .wr_addr(bk_wr_addr[1]), .wr_data(bk_wr_data[1]));
  tb_mem_model #(.SIZE(SZ), .LAT(4), .READY_PCT(80), .MIN_GAP(2)) u_m2 (.clk,
    .req_valid(bk_req_valid[2]), .req_ready(bk_req_ready[2]), .req_addr(bk_req_addr[2]),
    .resp_valid(bk_resp_valid[2]), .resp_data(bk_resp_data[2]),
    .wr_valid(bk_wr_valid[2]), .wr_ready(bk_wr_ready[2]), .wr_addr(bk_wr_addr[2]), .wr_data(bk_wr_data[2]));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] pat(input logic [31:0] a);
    return {16{a ^ 32'hA5A5_0000}};
  endfunction

  function automatic logic [511:0] bank_word(input int b, input int l);
    case (b)
      0:       return u_m0.mem[l];
      1:       return u_m1.mem[l];
      default: return u_m2.mem[l];
    endcase
  endfunction

  // response checker
  always @(posedge clk) if (rst_n && resp_valid) begin
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL response with no request");
    end else begin
      logic [31:0] a;
      a = expq.pop_front();
      if (resp_data !== pat(a)) begin failures++; $display("FAIL addr %0d wrong data", a); end
    end
    got++;
  end

  // banks only see requests for their own addresses (checked on the pattern)
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin expq.push_back(req_addr); sent++; end
    for (int b = 0; b < BANKS; b++)
      if (bk_req_valid[b] && bk_req_addr[b] >= SZ) begin failures++; $display("FAIL bank %0d address", b); end
    cyc++;
  end

  // Drivers change inputs on the falling edge only; a transfer happens on
  // the next rising edge once ready is seen high.
  task automatic send_rd(input logic [31:0] a);
    @(negedge clk); req_addr = a; req_valid = 1; #1;
    while (!req_ready) begin @(negedge clk); #1; end
  endtask

  task automatic send_wr(input logic [31:0] a, input logic [511:0] d);
    @(negedge clk); wr_addr = a; wr_data = d; wr_valid = 1; #1;
    while (!wr_ready) begin @(negedge clk); #1; end
  endtask

  task automatic idle();
    @(negedge clk); req_valid = 0; wr_valid = 0;
  endtask

  initial begin
    int t0, t1;
    logic [31:0] wa [200];
    logic [511:0] wd [200];
    req_valid = 0; wr_valid = 0; req_addr = 0; wr_addr = 0; wr_data = '0;
    @(posedge clk);
    for (int l = 0; l < SZ; l++) begin
      u_m0.mem[l] = pat(l * BANKS + 0);
      u_m1.mem[l] = pat(l * BANKS + 1);
      u_m2.mem[l] = pat(l * BANKS + 2);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // phase 1: random addresses, random gaps
    for (int i = 0; i < 400; i++) begin
      if ($urandom % 3 == 0) idle();
      send_rd($urandom % (SZ * BANKS));
    end
    idle();
    while (got < sent) @(posedge clk);
    checks++; if (sent != 400 || got != 400) begin failures++; $display("FAIL phase 1 count %0d/%0d", sent, got); end

    // phase 2: consecutive beats at full rate
    t0 = cyc;
    for (int i = 0; i < 300; i++) begin
      send_rd(32'(i + 7));
    end
    idle();
    while (got < sent) @(posedge clk);
    t1 = cyc;
    $display("phase 2: 300 beats in %0d cycles", t1 - t0);
    checks++; if (t1 - t0 >= 600) begin failures++; $display("FAIL split port too slow"); end

    // phase 3: writes
    for (int i = 0; i < 200; i++) begin
      wa[i] = 32'(i * 3 + ($urandom % 3));
      wd[i] = {16{$urandom}};
      send_wr(wa[i], wd[i]);
    end
    idle();
    repeat (3) @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      checks++;
      if (bank_word(wa[i] % BANKS, wa[i] / BANKS) !== wd[i]) begin
        failures++; $display("FAIL write %0d to %0d", i, wa[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
