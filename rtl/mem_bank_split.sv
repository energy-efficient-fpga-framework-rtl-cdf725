// mem_bank_split: spreads one 512-bit memory port of the engine over BANKS
// memory banks (DRAM modules or HBM channels), so that a matrix stored across
// several banks can use the bandwidth of all of them.
//
// Beats are interleaved: beat address a lives in bank (a mod BANKS) at local
// address (a div BANKS), so a reader walking consecutive beats visits the
// banks in turn and each bank sees only every BANKS-th request. A request is
// passed to its bank in the same clock (req_ready is that bank's ready, gated
// by room in the order queue); the bank number is pushed into an order queue.
// Each bank returns its data, in order, into a bank-private FIFO. The head of
// the order queue names the bank whose FIFO holds the next response due, so
// responses leave in request order however the banks' latencies differ. At
// most MAX_OUT requests are in flight, which bounds every FIFO, so a bank's
// response is never refused. Writes are routed by the same address rule;
// wr_ready is the ready of the addressed bank.
//
// Upstream: the engine's request/response protocol (in-order responses that
// are always accepted); downstream: the same protocol per bank. BANKS need
// not be a power of two. Spreading transfers over a parameterizable number of
// banks follows the design; interleaving by beat, the order queue and
// MAX_OUT are this implementation's choices.
module mem_bank_split
  import ce_pkg::*;
#(
  parameter int unsigned BANKS   = 2,
  parameter int unsigned MAX_OUT = 16,
  parameter int unsigned ADDR_W  = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // engine side
  input  logic                          req_valid,
  output logic                          req_ready,
  input  logic [ADDR_W-1:0]             req_addr,
  output logic                          resp_valid,
  output logic [BEAT_W-1:0]             resp_data,
  input  logic                          wr_valid,
  output logic                          wr_ready,
  input  logic [ADDR_W-1:0]             wr_addr,
  input  logic [BEAT_W-1:0]             wr_data,
  // bank side
  output logic [BANKS-1:0]              bk_req_valid,
  input  logic [BANKS-1:0]              bk_req_ready,
  output logic [BANKS-1:0][ADDR_W-1:0]  bk_req_addr,
  input  logic [BANKS-1:0]              bk_resp_valid,
  input  logic [BANKS-1:0][BEAT_W-1:0]  bk_resp_data,
  output logic [BANKS-1:0]              bk_wr_valid,
  input  logic [BANKS-1:0]              bk_wr_ready,
  output logic [BANKS-1:0][ADDR_W-1:0]  bk_wr_addr,
  output logic [BANKS-1:0][BEAT_W-1:0]  bk_wr_data
);

  localparam int unsigned SW = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned CW = $clog2(MAX_OUT + 1);

  logic [SW-1:0]     rd_bank, wr_bank;
  logic [ADDR_W-1:0] rd_local, wr_local;
  assign rd_bank  = SW'(req_addr % ADDR_W'(BANKS));
  assign rd_local = req_addr / ADDR_W'(BANKS);
  assign wr_bank  = SW'(wr_addr % ADDR_W'(BANKS));
  assign wr_local = wr_addr / ADDR_W'(BANKS);

  // ---------------- requests and the order queue ----------------
  logic          oq_in_ready, oq_out_valid, oq_pop;
  logic [SW-1:0] oq_head;
  logic [CW-1:0] unused_oq_count;
  logic          req_fire;

  assign req_ready = oq_in_ready && bk_req_ready[rd_bank];
  assign req_fire  = req_valid && req_ready;

  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      bk_req_valid[b] = req_valid && oq_in_ready && (rd_bank == SW'(b));
      bk_req_addr[b]  = rd_local;
      bk_wr_valid[b]  = wr_valid && (wr_bank == SW'(b));
      bk_wr_addr[b]   = wr_local;
      bk_wr_data[b]   = wr_data;
    end
  end
  assign wr_ready = bk_wr_ready[wr_bank];

  hls_stream #(.W(SW), .DEPTH(MAX_OUT)) u_order (
    .clk, .rst_n, .in_valid(req_fire), .in_ready(oq_in_ready), .in_data(rd_bank),
    .out_valid(oq_out_valid), .out_ready(oq_pop), .out_data(oq_head), .count(unused_oq_count));

  // ---------------- per-bank response FIFOs ----------------
  logic [BANKS-1:0]             rf_valid, rf_pop, rf_in_ready;
  logic [BANKS-1:0][BEAT_W-1:0] rf_data;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [CW-1:0] unused_count;
    hls_stream #(.W(BEAT_W), .DEPTH(MAX_OUT)) u_resp (
      .clk, .rst_n, .in_valid(bk_resp_valid[b]), .in_ready(rf_in_ready[b]), .in_data(bk_resp_data[b]),
      .out_valid(rf_valid[b]), .out_ready(rf_pop[b]), .out_data(rf_data[b]), .count(unused_count));
    assign rf_pop[b] = oq_out_valid && (oq_head == SW'(b)) && rf_valid[b];
  end

  assign oq_pop     = oq_out_valid && rf_valid[oq_head];
  assign resp_valid = oq_pop;
  assign resp_data  = rf_data[oq_head];

  // A bank's response always finds room: at most MAX_OUT requests are open.
  for (genvar b = 0; b < BANKS; b++) begin : g_chk
    a_room: assert property (@(posedge clk) disable iff (!rst_n)
                             bk_resp_valid[b] |-> rf_in_ready[b]);
  end

endmodule
