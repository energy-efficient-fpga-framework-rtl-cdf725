// tb_hls_stream: self-checking test of the stream FIFO. A producer with random
// valid and a consumer with random ready move 2000 words; every word must come
// out once, in order. The occupancy output is compared with a count kept by
// the testbench, and the full and empty states must both be reached.
module tb_hls_stream;
  localparam int W = 32, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic accepted = 0;
  int checks = 0, failures = 0, sent = 0, rcvd = 0, occ = 0, fulls = 0, empties = 0;

  hls_stream #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (rcvd < 2000) begin
      @(negedge clk);
      checks++;
      if (count != occ) begin failures++; $display("FAIL count %0d vs %0d", count, occ); end
      if (count == DEPTH) fulls++;
      if (count == 0) empties++;
      if (!in_valid || accepted) begin   // an offered word is held until taken
        in_valid = (sent < 2000) && ($urandom % 100 < 60);
        in_data  = sent;
      end
      out_ready = ($urandom % 100) < ((rcvd < 1000) ? 30 : 80);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != rcvd) begin failures++; $display("FAIL order got %0d exp %0d", out_data, rcvd); end
        rcvd++;
        occ--;
      end
      accepted = in_valid && in_ready;
      if (accepted) begin sent++; occ++; end
    end
    checks++; if (fulls == 0)   begin failures++; $display("FAIL never full"); end
    checks++; if (empties == 0) begin failures++; $display("FAIL never empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
