// index_decoder: per-PE decompressor for one block of partial-product indexes.
//
// Offline, every weight is replaced by an index into the unique partial
// products of its input neuron. All indexes of one input neuron share one
// width (1..8 bits); a block of BS_ROW x BS_COL indexes covers BS_ROW input
// neurons (block rows) and BS_COL output neurons (block columns). In memory a
// block is stored as a stream of CHUNK_W-bit chunks, least significant bit
// first:
//   header : BS_ROW 3-bit size codes (row 0 first), padded to whole chunks;
//   body   : the BS_COL indexes of row 0, then of row 1, ... each index
//            using idx_bits(size code of its row) bits, padded to whole chunks.
// The paper gives the content (indexes packed row by row, a 3-bit size per
// input neuron sent with the block, a pointer advanced by the index size,
// padding to 8 bits); the header layout, LSB-first packing and chunk padding
// are this design's choices.
//
// Operation: `start` begins a block. The decoder issues `chunk_req` pulses, one
// per chunk, never more than the block holds; each request is answered by
// `chunk_valid` with `chunk_data` exactly one cycle later (a synchronous SRAM
// read). Indexes come out on the write port at up to one per cycle,
// addressed row * BS_COL + col, zero-padded to 8 bits. `done` pulses for one
// cycle after the last index is written. A 2*CHUNK_W-bit bit buffer and a
// bit count take the place of the paper's byte read and pointer.
// rst_n is the asynchronous reset and also disables the assertions
// (`disable iff`); lint reports that double use, which is intended.
module index_decoder
  import crew_pkg::*;
#(
  parameter int unsigned BS_ROW  = 16,
  parameter int unsigned BS_COL  = 16,
  parameter int unsigned CHUNK_W = 32,
  localparam int unsigned NIDX   = BS_ROW * BS_COL,
  localparam int unsigned WA_W   = $clog2(NIDX),
  localparam int unsigned HDR_CH = (BS_ROW * SIZE_W + CHUNK_W - 1) / CHUNK_W,
  localparam int unsigned BUF_W  = 2 * CHUNK_W,
  localparam int unsigned CNT_W  = $clog2(NIDX * IDX_W / CHUNK_W + HDR_CH + 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic               chunk_req,
  input  logic               chunk_valid,
  input  logic [CHUNK_W-1:0] chunk_data,
  output logic               wr_en,
  output logic [WA_W-1:0]    wr_addr,
  output idx_t               wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_BODY} state_e;
  state_e state;

  logic [HDR_CH*CHUNK_W-1:0] hdr;
  logic [CNT_W-1:0]          req_cnt;     // chunks requested in this phase
  logic [CNT_W-1:0]          got_cnt;     // header chunks received
  logic [CNT_W-1:0]          body_chunks; // chunks the body occupies
  logic                      inflight;    // a request awaits its data
  logic [BUF_W-1:0]          bitbuf;
  logic [$clog2(BUF_W+1)-1:0] nbits;
  logic [$clog2(BS_ROW)-1:0] row;
  logic [$clog2(BS_COL)-1:0] col;

  size_code_t  cur_code;
  int unsigned cur_bits;
  logic        emit;
  logic [BUF_W-1:0] consumed, appended;
  logic [$clog2(BUF_W+1)-1:0] n_after;

  assign cur_code = hdr[row*SIZE_W +: SIZE_W];
  assign cur_bits = idx_bits(cur_code);
  assign emit     = (state == S_BODY) && (int'(nbits) >= cur_bits);

  // Ask for a chunk while the block still has some and the buffer has room
  // for it on arrival.
  always_comb begin
    chunk_req = 1'b0;
    unique case (state)
      S_HDR:  chunk_req = (req_cnt < CNT_W'(HDR_CH)) && !inflight;
      S_BODY: chunk_req = (req_cnt < body_chunks) && !inflight &&
                          (int'(nbits) + CHUNK_W <= BUF_W);
      default: chunk_req = 1'b0;
    endcase
  end

  // Total body length in chunks, from the size codes.
  function automatic logic [CNT_W-1:0] body_len(logic [HDR_CH*CHUNK_W-1:0] h);
    int unsigned bits;
    bits = 0;
    for (int unsigned r = 0; r < BS_ROW; r++)
      bits += BS_COL * idx_bits(h[r*SIZE_W +: SIZE_W]);
    return CNT_W'((bits + CHUNK_W - 1) / CHUNK_W);
  endfunction

  logic [HDR_CH*CHUNK_W-1:0] hdr_next;
  always_comb begin
    hdr_next = hdr;
    hdr_next[got_cnt*CHUNK_W +: CHUNK_W] = chunk_data;
  end

  always_comb begin
    consumed = emit ? (bitbuf >> cur_bits) : bitbuf;
    n_after  = emit ? nbits - ($clog2(BUF_W+1))'(cur_bits) : nbits;
    appended = consumed;
    if (state == S_BODY && chunk_valid)
      appended = consumed | (BUF_W'(chunk_data) << n_after);
  end

  assign wr_en   = emit;
  assign wr_addr = WA_W'(row) * WA_W'(BS_COL) + WA_W'(col);
  assign wr_data = idx_t'(bitbuf[IDX_W-1:0] & ((IDX_W'(1) << cur_bits) - IDX_W'(1)));
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; hdr <= '0; req_cnt <= '0; got_cnt <= '0; body_chunks <= '0;
      inflight <= 1'b0; bitbuf <= '0; nbits <= '0; row <= '0; col <= '0; done <= 1'b0;
    end else begin
      done     <= 1'b0;
      inflight <= chunk_req;
      if (chunk_req) req_cnt <= req_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_HDR; req_cnt <= '0; got_cnt <= '0;
          bitbuf <= '0; nbits <= '0; row <= '0; col <= '0;
        end
        S_HDR: if (chunk_valid) begin
          hdr     <= hdr_next;
          got_cnt <= got_cnt + 1'b1;
          if (got_cnt == CNT_W'(HDR_CH - 1)) begin
            state       <= S_BODY;
            req_cnt     <= '0;
            body_chunks <= body_len(hdr_next);
          end
        end
        S_BODY: begin
          bitbuf <= appended;
          nbits  <= n_after + ((chunk_valid) ? ($clog2(BUF_W+1))'(CHUNK_W) : '0);
          if (emit) begin
            if (col == ($clog2(BS_COL))'(BS_COL - 1)) begin
              col <= '0;
              if (row == ($clog2(BS_ROW))'(BS_ROW - 1)) begin
                state <= S_IDLE; done <= 1'b1;
              end else row <= row + 1'b1;
            end else col <= col + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A chunk only ever arrives in answer to a request.
  assert property (@(posedge clk) disable iff (!rst_n) chunk_valid |-> inflight);
endmodule
