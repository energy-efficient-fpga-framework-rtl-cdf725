// tb_write_c: self-checking test of the Write C process with BUFF_N = 32
// (two beats per row), 9 rows and a row stride of 5 beats. Stream_C_in and
// Stream_C_out are real stream FIFOs filled by the testbench at random rates
// with small integers, so each FP32 sum is exact; the memory bank model
// accepts writes at random. Every location of the tile must end up holding
// old + new, nothing outside the tile may be written, every beat must be
// consumed from both streams, and done must pulse once.
module tb_write_c;
  import tb_pkg::*;
  localparam int BUFF_N = 32, NB = BUFF_N / 16, ROWS = 9, STRIDE = 5, BASE = 3, SIZE = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] base, stride, rows;
  logic [$clog2(NB+1)-1:0] row_beats = NB;
  logic cin_valid, cin_ready, cout_valid, cout_ready, wr_valid, wr_ready;
  logic [511:0] cin_data, cout_data, wr_data;
  logic [31:0] wr_addr;
  logic pi_valid, pi_ready, po_valid, po_ready;
  logic [511:0] pi_data, po_data;
  int old_v [ROWS * NB][16], new_v [ROWS * NB][16];
  int checks = 0, failures = 0, ni = 0, no = 0, dones = 0;
  logic fi = 0, fo = 0;

  write_c #(.BUFF_N(BUFF_N)) dut (.*);
  hls_stream #(.W(512), .DEPTH(4)) u_ci (.clk, .rst_n, .in_valid(pi_valid), .in_ready(pi_ready),
    .in_data(pi_data), .out_valid(cin_valid), .out_ready(cin_ready), .out_data(cin_data), .count());
  hls_stream #(.W(512), .DEPTH(2)) u_co (.clk, .rst_n, .in_valid(po_valid), .in_ready(po_ready),
    .in_data(po_data), .out_valid(cout_valid), .out_ready(cout_ready), .out_data(cout_data), .count());
  tb_mem_model #(.SIZE(SIZE), .LAT(1), .READY_PCT(60)) u_mem (
    .clk, .req_valid(1'b0), .req_ready(), .req_addr(32'd0), .resp_valid(), .resp_data(),
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producers: a beat, once offered, stays until taken
  always @(negedge clk) if (rst_n) begin
    if (fi) ni++;
    if (fo) no++;
    if (!pi_valid || fi) begin
      pi_valid = (ni < ROWS * NB) && ($urandom % 100 < 50);
      for (int w = 0; w < 16; w++) pi_data[32*w +: 32] = i2f(old_v[ni % (ROWS * NB)][w]);
    end
    if (!po_valid || fo) begin
      po_valid = (no < ROWS * NB) && ($urandom % 100 < 40);
      for (int w = 0; w < 16; w++) po_data[32*w +: 32] = i2f(new_v[no % (ROWS * NB)][w]);
    end
    fi = pi_valid && pi_ready;
    fo = po_valid && po_ready;
    if (done) dones++;
  end

  initial begin
    pi_valid = 0; po_valid = 0; pi_data = 0; po_data = 0;
    foreach (old_v[i, w]) begin
      old_v[i][w] = int'($urandom % 2000) - 1000;
      new_v[i][w] = int'($urandom % 2000) - 1000;
    end
    for (int i = 0; i < SIZE; i++) u_mem.mem[i] = {16{32'hDEAD_BEEF}};
    base = BASE; stride = STRIDE; rows = ROWS;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (!busy);
    repeat (4) @(negedge clk);
    for (int a = 0; a < SIZE; a++) begin
      int r, b;
      r = (a - BASE) / STRIDE; b = (a - BASE) % STRIDE;
      if (a >= BASE && r < ROWS && b < NB) begin
        for (int w = 0; w < 16; w++) begin
          checks++;
          if (u_mem.mem[a][32*w +: 32] !== i2f(old_v[r * NB + b][w] + new_v[r * NB + b][w])) begin
            failures++;
            if (failures < 10) $display("FAIL addr %0d word %0d got %h", a, w, u_mem.mem[a][32*w +: 32]);
          end
        end
      end else begin
        checks++;
        if (u_mem.mem[a] !== {16{32'hDEAD_BEEF}}) begin failures++; $display("FAIL stray write at %0d", a); end
      end
    end
    checks++;
    if (dones != 1 || ni != ROWS * NB || no != ROWS * NB || cin_valid || cout_valid) begin
      failures++; $display("FAIL dones=%0d ni=%0d no=%0d", dones, ni, no);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
