// tb_bram_b: self-checking test of the B tile buffer (BUFF_K = 32,
// BUFF_N = 32, so each row is two beats). Every row is written beat by beat
// with random data in random order, then read back in random row order; the
// read data must appear exactly one cycle after the address and match.
module tb_bram_b;
  localparam int BUFF_K = 32, BUFF_N = 32, NB = BUFF_N / 16;
  logic clk = 0;
  logic wr_en;
  logic [$clog2(BUFF_K)-1:0] wr_addr, rd_addr;
  logic [$clog2(NB+1)-1:0] wr_beat;
  logic [511:0] wr_data;
  logic [BUFF_N*32-1:0] rd_data;
  logic [BUFF_N*32-1:0] ref_mem [BUFF_K];
  int checks = 0, failures = 0;

  bram_b #(.BUFF_K(BUFF_K), .BUFF_N(BUFF_N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] rnd_beat();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    wr_en = 0; wr_addr = 0; wr_beat = 0; wr_data = 0; rd_addr = 0;
    // two full write sweeps, the second overwriting the first
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < BUFF_K * NB; i++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = ($urandom % BUFF_K); wr_beat = ($urandom % NB);
        if (s == 1) begin wr_addr = i / NB; wr_beat = i % NB; end
        wr_data = rnd_beat();
        ref_mem[wr_addr][512*wr_beat +: 512] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk) rd_addr = $urandom % BUFF_K;
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[rd_addr]) begin
        failures++; $display("FAIL row %0d", rd_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
