// tb_read_c: self-checking test of the Read C stream reader (2 beats per row,
// row stride 6 beats, 12 rows). The reader feeds a real stream FIFO of depth
// 4 whose consumer takes beats at random; the memory bank model stalls
// requests at random. The beats leaving the stream must be exactly the
// expected slice of the matrix, in row order, the stream must never be
// offered a beat while full (an assertion in the FIFO), and the reader must
// throttle: the stream must be seen full at least once. A second run reads
// rows one beat shorter, and a third with zero rows must end at once.
module tb_read_c;
  localparam int ROW_BEATS = 2, STRIDE = 6, ROWS = 12, DEPTH = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] base, stride, rows;
  logic [$clog2(ROW_BEATS+1)-1:0] row_beats;
  int rb = ROW_BEATS;
  logic req_valid, req_ready, resp_valid;
  logic [31:0] req_addr;
  logic [511:0] resp_data, out_data, s_data;
  logic out_valid, s_in_ready, s_valid, s_ready;
  logic [$clog2(DEPTH+1)-1:0] stream_count;
  int checks = 0, failures = 0, got = 0, fulls = 0;

  read_c #(.ROW_BEATS(ROW_BEATS), .DEPTH(DEPTH)) dut (.*);
  hls_stream #(.W(512), .DEPTH(DEPTH)) u_s (.clk, .rst_n, .in_valid(out_valid), .in_ready(s_in_ready),
    .in_data(out_data), .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data), .count(stream_count));
  tb_mem_model #(.SIZE(256), .LAT(2), .READY_PCT(70)) u_mem (
    .clk, .req_valid, .req_ready, .req_addr, .resp_valid, .resp_data,
    .wr_valid(1'b0), .wr_ready(), .wr_addr(32'd0), .wr_data('0));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) s_ready = ($urandom % 100) < 25;

  always @(posedge clk) begin
    if (stream_count == DEPTH) fulls++;
    if (rst_n && s_valid && s_ready) begin
      checks++;
      if (s_data !== u_mem.mem[base + (got / rb) * STRIDE + got % rb]) begin
        failures++; $display("FAIL beat %0d got %h", got, s_data[31:0]);
      end
      got++;
    end
  end

  initial begin
    for (int i = 0; i < 256; i++)
      for (int w = 0; w < 16; w++) u_mem.mem[i][32*w +: 32] = $urandom;
    base = 5; stride = STRIDE; rows = ROWS; row_beats = ROW_BEATS;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    wait (got == ROWS * ROW_BEATS);
    repeat (20) @(posedge clk);
    checks++;
    if (got != ROWS * ROW_BEATS || s_valid) begin failures++; $display("FAIL count %0d", got); end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL stream never full"); end
    // shorter rows, as at the edge of a matrix
    @(negedge clk);
    rb = ROW_BEATS - 1; row_beats = ROW_BEATS - 1; base = 40; got = 0; start = 1;
    @(negedge clk) start = 0;
    wait (done);
    wait (got == ROWS * rb);
    repeat (20) @(posedge clk);
    checks++;
    if (got != ROWS * rb || s_valid) begin failures++; $display("FAIL short rows count %0d", got); end
    // zero rows: done at once, no requests
    @(negedge clk) rows = 0; start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (!done || busy || req_valid) begin failures++; $display("FAIL zero-row run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
