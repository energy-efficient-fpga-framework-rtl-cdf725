// tb_mem_model: behavioural model of one external memory bank (DRAM or HBM
// channel) with a 512-bit read port and a 512-bit write port, for testbenches.
// It is not synthesizable and stands in for memory the design does not build.
//
// Read port: a request is taken when req_valid && req_ready; req_ready is
// drawn at random each cycle (READY_PCT percent high). The data is sampled at
// the request and returned LAT or more cycles later on resp_valid/resp_data,
// in request order, at most one beat per cycle. Write port: a write is taken
// when wr_valid && wr_ready (also random) and is visible to any later read.
// The array `mem` is filled and inspected by the testbench hierarchically.
// stall_cycles counts cycles in which a request or a write waited. With
// MIN_GAP > 0 the read port also stays not-ready for MIN_GAP cycles after each
// request it takes, which models a bank slower than the engine's clock.
module tb_mem_model #(
  parameter int unsigned SIZE      = 1024,
  parameter int unsigned LAT       = 4,
  parameter int unsigned READY_PCT = 70,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned MIN_GAP   = 0
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              resp_valid,
  output logic [511:0]      resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [511:0]      wr_data
);

  logic [511:0] mem [SIZE];
  logic [511:0] q_data [$];
  longint       q_due  [$];
  longint       now = 0;
  int           stall_cycles = 0;
  int           bad_addr = 0;
  int           gap = 0;

  initial begin
    req_ready  = 1'b0;
    wr_ready   = 1'b0;
    resp_valid = 1'b0;
    resp_data  = '0;
    foreach (mem[i]) mem[i] = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if ((req_valid && !req_ready) || (wr_valid && !wr_ready)) stall_cycles <= stall_cycles + 1;
    if (req_valid && req_ready) begin
      if (req_addr >= SIZE) bad_addr <= bad_addr + 1;
      q_data.push_back(mem[req_addr % SIZE]);
      q_due.push_back(now + LAT);
    end
    if (wr_valid && wr_ready) begin
      if (wr_addr >= SIZE) bad_addr <= bad_addr + 1;
      else mem[wr_addr] <= wr_data;
    end
    if (q_due.size() > 0 && q_due[0] <= now) begin
      resp_valid <= 1'b1;
      resp_data  <= q_data.pop_front();
      void'(q_due.pop_front());
    end else begin
      resp_valid <= 1'b0;
    end
    if (req_valid && req_ready) gap = MIN_GAP;
    else if (gap > 0)           gap = gap - 1;
    req_ready <= (gap == 0) && (($urandom % 100) < READY_PCT);
    wr_ready  <= ($urandom % 100) < READY_PCT;
  end

endmodule
