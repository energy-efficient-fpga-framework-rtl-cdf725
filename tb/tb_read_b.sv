// tb_read_b: self-checking test of the B tile loader. A memory bank model
// with random request stalls holds a 64-column B (stride 4 beats); tiles of
// 32 x 32 (two beats per row) is loaded, then a 20 x 16 edge tile from
// another origin. Every
// buffer write must carry the beat of B that belongs at that (row, beat)
// position, every position must be written once, done must pulse once, and
// the load must take no more than one beat per cycle plus stalls and latency.
module tb_read_b;
  localparam int BUFF_K = 32, BUFF_N = 32, NB = BUFF_N / 16, STRIDE = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] base, stride;
  logic [$clog2(BUFF_K+1)-1:0] rows;
  logic [$clog2(NB+1)-1:0] row_beats;
  logic req_valid, req_ready, resp_valid;
  logic [31:0] req_addr;
  logic [511:0] resp_data;
  logic wr_en;
  logic [$clog2(BUFF_K)-1:0] wr_addr;
  logic [$clog2(NB+1)-1:0] wr_beat;
  logic [511:0] wr_data;
  int checks = 0, failures = 0, writes, dones;

  read_b #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N)) dut (.*);
  tb_mem_model #(.SIZE(1024), .LAT(3), .READY_PCT(60)) u_mem (
    .clk, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data,
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (wr_en) begin
      checks++;
      if (wr_data !== u_mem.mem[base + wr_addr * STRIDE + wr_beat] || wr_addr != writes / row_beats ||
          wr_beat != writes % row_beats) begin
        failures++;
        $display("FAIL write %0d at row %0d beat %0d", writes, wr_addr, wr_beat);
      end
      writes++;
    end
    if (done) dones++;
  end

  initial begin
    int t0;
    stride = STRIDE; base = 0;
    for (int i = 0; i < 1024; i++)
      for (int w = 0; w < 16; w++) u_mem.mem[i][32*w +: 32] = {i[15:0], w[15:0]};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (bases[t]) begin
      @(negedge clk);
      base = bases[t]; rows = t ? 20 : BUFF_K; row_beats = t ? 1 : NB; writes = 0; dones = 0; start = 1; t0 = $time;
      @(negedge clk) start = 0;
      wait (done); @(posedge clk); @(negedge clk);
      checks++;
      if (writes != rows * row_beats || dones != 1 || busy) begin
        failures++; $display("FAIL tile %0d: writes=%0d dones=%0d", t, writes, dones);
      end
      checks++;
      if (($time - t0) / 10 < rows * row_beats || ($time - t0) / 10 > rows * row_beats + u_mem.stall_cycles + 10) begin
        failures++; $display("FAIL tile %0d took %0d cycles", t, ($time - t0) / 10);
      end
      u_mem.stall_cycles = 0;
    end
    checks++;
    if (u_mem.bad_addr != 0) begin failures++; $display("FAIL out-of-range address"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bases[2] = '{0, 2 + 3 * STRIDE};
endmodule
