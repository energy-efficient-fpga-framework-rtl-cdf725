// read_b: loads one BUFF_K x BUFF_N tile of matrix B from external memory into
// bram_b (the "Read B" step that precedes each dataflow pass).
//
// B is stored row-major in memory, N FP32 values per row, so a tile row is
// BUFF_N/16 consecutive 512-bit beats and consecutive tile rows are `stride`
// beats apart (stride = N/16). On a start pulse the block latches the beat
// address of the tile's first element and the tile's extent, `rows` rows of
// `row_beats` beats (both non-zero, at most BUFF_K and BUFF_N/16; smaller only
// at the edges of B), and issues one read request per beat, row by row, as
// fast as the memory port accepts them. Buffer positions outside the extent
// are left as they were; the kernel never reads them. Read data returns in
// request order; each returning beat is written into the next (row, beat)
// position of the buffer. done pulses for one cycle in the cycle after the last
// beat is written.
//
// Memory port: req_valid/req_ready/req_addr (beat address) and
// resp_valid/resp_data. The port returns responses in order and the block
// always accepts them. The tile shape follows the design; the request
// protocol and this address walk are this implementation's choices.
module read_b
  import ce_pkg::*;
#(
  parameter int unsigned BUFF_K = 128,
  parameter int unsigned BUFF_N = 16,
  parameter int unsigned ADDR_W = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [ADDR_W-1:0]          base,
  input  logic [ADDR_W-1:0]          stride,
  input  logic [$clog2(BUFF_K+1)-1:0] rows,
  input  logic [$clog2(BUFF_N/BEAT_WORDS+1)-1:0] row_beats,
  output logic                       busy,
  output logic                       done,
  // memory read port
  output logic                       req_valid,
  input  logic                       req_ready,
  output logic [ADDR_W-1:0]          req_addr,
  input  logic                       resp_valid,
  input  logic [BEAT_W-1:0]          resp_data,
  // BRAM_B write port
  output logic                       wr_en,
  output logic [$clog2(BUFF_K)-1:0]  wr_addr,
  output logic [$clog2(BUFF_N/BEAT_WORDS+1)-1:0] wr_beat,
  output logic [BEAT_W-1:0]          wr_data
);

  localparam int unsigned NB  = BUFF_N / BEAT_WORDS;   // beats per tile row
  localparam int unsigned KW  = $clog2(BUFF_K);
  localparam int unsigned BW  = $clog2(NB + 1);

  logic [ADDR_W-1:0] row_addr;
  logic [KW-1:0]     q_k, r_k;
  logic [BW-1:0]     q_b, r_b;
  logic              q_left;
  logic [KW-1:0]     last_k;
  logic [BW-1:0]     last_b;

  assign req_valid = busy && q_left;
  assign req_addr  = row_addr + ADDR_W'(q_b);
  assign wr_en     = busy && resp_valid;
  assign wr_addr   = r_k;
  assign wr_beat   = r_b;
  assign wr_data   = resp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      q_left   <= 1'b0;
      last_k   <= '0;
      last_b   <= '0;
      row_addr <= '0;
      q_k      <= '0;
      q_b      <= '0;
      r_k      <= '0;
      r_b      <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        q_left   <= 1'b1;
        row_addr <= base;
        last_k   <= KW'(rows - 1'b1);
        last_b   <= row_beats - 1'b1;
        q_k      <= '0;
        q_b      <= '0;
        r_k      <= '0;
        r_b      <= '0;
      end else if (busy) begin
        if (req_valid && req_ready) begin
          if (q_b == last_b) begin
            q_b      <= '0;
            q_k      <= q_k + 1'b1;
            row_addr <= row_addr + stride;
            if (q_k == last_k) q_left <= 1'b0;
          end else begin
            q_b <= q_b + 1'b1;
          end
        end
        if (resp_valid) begin
          if (r_b == last_b) begin
            r_b <= '0;
            r_k <= r_k + 1'b1;
            if (r_k == last_k) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            r_b <= r_b + 1'b1;
          end
        end
      end
    end
  end

endmodule
