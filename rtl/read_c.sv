// read_c: streams the BUFF_N-wide slice of every row of matrix C that belongs
// to the current tile, row after row, into Stream_C_in (the "Read C" process
// of the dataflow region), so that write_c can add the new partial products to
// what C already holds. Row m of C, columns n0 .. n0+BUFF_N-1, is ROW_BEATS =
// BUFF_N/16 consecutive beats; consecutive rows are `stride` = N/16 beats
// apart.
//
// On a start pulse the block latches the beat address of the slice's first
// element, the row stride, the row count and the row length in beats
// (row_beats, at most ROW_BEATS; shorter at the right or bottom edge of a
// matrix whose size is not a multiple of the tile), then walks the rows
// issuing one read request per beat. Read data returns in request order and goes straight
// into the stream. To never overrun the stream, a request is issued only while
// the beats already in the stream plus those still in flight are fewer than
// the stream depth (stream_count comes from the stream FIFO). done pulses one
// cycle after the last beat has entered the stream.
//
// Memory port: req_valid/req_ready/req_addr (beat address), resp_valid/
// resp_data, in-order, always accepted. Stream side: out_valid/out_data, whose
// consumer (the FIFO) is guaranteed to have room. What is read and where it
// goes follows the design; the request protocol and the credit rule are this
// implementation's choices.
module read_c
  import ce_pkg::*;
#(
  parameter int unsigned ROW_BEATS = 1,
  parameter int unsigned DEPTH     = 8,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DIM_W     = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [ADDR_W-1:0]          base,
  input  logic [ADDR_W-1:0]          stride,
  input  logic [DIM_W-1:0]           rows,
  input  logic [$clog2(ROW_BEATS+1)-1:0] row_beats,
  output logic                       busy,
  output logic                       done,
  // memory read port
  output logic                       req_valid,
  input  logic                       req_ready,
  output logic [ADDR_W-1:0]          req_addr,
  input  logic                       resp_valid,
  input  logic [BEAT_W-1:0]          resp_data,
  // stream side
  output logic                       out_valid,
  output logic [BEAT_W-1:0]          out_data,
  input  logic [$clog2(DEPTH+1)-1:0] stream_count
);

  localparam int unsigned BW = $clog2(ROW_BEATS + 1);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [ADDR_W-1:0] row_addr;
  logic [DIM_W-1:0]  q_row, r_row, n_rows;
  logic [BW-1:0]     n_beats;
  logic [BW-1:0]     q_b, r_b;
  logic              q_left;
  logic [CW:0]       in_flight;
  logic              req_fire;

  assign req_valid = busy && q_left &&
                     ((CW+1)'(stream_count) + in_flight < (CW+1)'(DEPTH));
  assign req_addr  = row_addr + ADDR_W'(q_b);
  assign req_fire  = req_valid && req_ready;
  assign out_valid = busy && resp_valid;
  assign out_data  = resp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      q_left    <= 1'b0;
      row_addr  <= '0;
      n_rows    <= '0;
      n_beats   <= '0;
      q_row     <= '0;
      r_row     <= '0;
      q_b       <= '0;
      r_b       <= '0;
      in_flight <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= (rows != '0) && (row_beats != '0);
        done      <= (rows == '0) || (row_beats == '0);
        q_left    <= (rows != '0) && (row_beats != '0);
        row_addr  <= base;
        n_rows    <= rows;
        n_beats   <= row_beats;
        q_row     <= '0;
        r_row     <= '0;
        q_b       <= '0;
        r_b       <= '0;
        in_flight <= '0;
      end else if (busy) begin
        in_flight <= in_flight + (CW+1)'(req_fire) - (CW+1)'(resp_valid);
        if (req_fire) begin
          if (q_b == n_beats - 1'b1) begin
            q_b      <= '0;
            q_row    <= q_row + 1'b1;
            row_addr <= row_addr + stride;
            if (q_row == n_rows - 1'b1) q_left <= 1'b0;
          end else begin
            q_b <= q_b + 1'b1;
          end
        end
        if (resp_valid) begin
          if (r_b == n_beats - 1'b1) begin
            r_b   <= '0;
            r_row <= r_row + 1'b1;
            if (r_row == n_rows - 1'b1) begin
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

  // Responses only arrive for requests that were issued.
  a_no_spurious_resp: assert property (@(posedge clk) disable iff (!rst_n)
                                       resp_valid |-> busy);

endmodule
