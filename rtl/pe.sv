// pe: one processing element of the CREW array.
//
// A PE has an independent multiplier and adder (as in the paper's PE figure):
//  * Step 1 (multiplier): when `mul_valid`, it multiplies the broadcast input
//    `mul_x` by its unique weight `mul_w` and registers the 16-bit partial
//    product one cycle later on `pp_out`/`pp_valid`, to be stored in the row's
//    shared partial product buffer. The operand registers only load while
//    `mul_valid` is high, so the multiplier is idle (and could be gated)
//    once step 1 is over.
//  * Index fetch and decode: on `dec_start` the PE's index decoder reads the
//    next compressed block from this PE's index bank of the global buffer
//    (sequential addresses from 0, restarted by `layer_start`) and writes the
//    decoded indexes into half `dec_half` of its indirections buffer. `dec_done`
//    pulses when the block is complete.
//  * Step 2 (adder): on `cmp_start` the PE walks the BS_ROW x BS_COL indexes of
//    indirections half `cmp_half`, one per cycle. For block row r and column
//    k it reads index idx, fetches partial product (input i, idx) from the
//    shared buffer, where i = (r + COL) mod BS_ROW so that PE columns start on
//    different banks, and adds it into partial sum entry cmp_base + k. With
//    `cmp_first` the first add of each entry overwrites instead (start of a
//    layer). A block takes exactly BS_ROW * BS_COL cycles; `cmp_done` pulses in
//    the last one.
//  * Reduction: `red_out = red_in + psum[red_addr]`, combinational, chained
//    from the PE above to the PE below.
// What follows the paper: the split of work, buffer sizes, staggered bank
// offsets and the top-to-bottom reduction. The cycle-level sequencing and
// the combinational buffer reads are this design's choices.
// rst_n is the asynchronous reset and also disables the assertions
// (`disable iff`); lint reports that double use, which is intended.
module pe
  import crew_pkg::*;
#(
  parameter int unsigned COL          = 0,
  parameter int unsigned PE_COLS      = 16,
  parameter int unsigned BS_ROW       = 16,
  parameter int unsigned BS_COL       = 16,
  parameter int unsigned PSUM_ENTRIES = 256,
  parameter int unsigned PSUM_W       = 24,
  parameter int unsigned CHUNK_W      = 32,
  parameter int unsigned IDX_AW       = 13,
  localparam int unsigned NIDX  = BS_ROW * BS_COL,
  localparam int unsigned SA_W  = $clog2(NIDX),
  localparam int unsigned PA_W  = $clog2(PSUM_ENTRIES),
  localparam int unsigned OW    = $clog2((BS_ROW / PE_COLS) * UW_MAX),
  localparam int unsigned BW    = (PE_COLS > 1) ? $clog2(PE_COLS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     layer_start,
  // step 1
  input  logic                     mul_valid,
  input  q_t                       mul_x,
  input  q_t                       mul_w,
  output pp_t                      pp_out,
  output logic                     pp_valid,
  // index fetch / decode
  input  logic                     dec_start,
  input  logic                     dec_half,
  output logic                     dec_done,
  output logic                     idx_re,
  output logic [IDX_AW-1:0]        idx_addr,
  input  logic [CHUNK_W-1:0]       idx_rdata,
  // step 2
  input  logic                     cmp_start,
  input  logic                     cmp_half,
  input  logic [PA_W-1:0]          cmp_base,
  input  logic                     cmp_first,
  output logic                     cmp_busy,
  output logic                     cmp_done,
  output logic [BW-1:0]            pp_rd_bank,
  output logic [OW-1:0]            pp_rd_off,
  input  pp_t                      pp_rd_data,
  // reduction
  input  logic [PA_W-1:0]          red_addr,
  input  logic signed [PSUM_W-1:0] red_in,
  output logic signed [PSUM_W-1:0] red_out
);
  // ---------------- step 1: multiplier ----------------
  q_t x_q, w_q;
  logic mul_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      x_q <= '0; w_q <= '0; mul_q <= 1'b0;
    end else begin
      mul_q <= mul_valid;
      if (mul_valid) begin x_q <= mul_x; w_q <= mul_w; end
    end
  assign pp_out   = pp_t'(x_q) * pp_t'(w_q);
  assign pp_valid = mul_q;

  // ---------------- index fetch and decode ----------------
  logic              chunk_req, chunk_valid;
  logic              dwr_en;
  logic [SA_W-1:0]   dwr_addr;
  idx_t              dwr_data;
  logic              dec_busy;
  logic              dec_half_q;

  index_decoder #(.BS_ROW(BS_ROW), .BS_COL(BS_COL), .CHUNK_W(CHUNK_W)) u_dec (
    .clk, .rst_n, .start(dec_start), .busy(dec_busy), .done(dec_done),
    .chunk_req, .chunk_valid, .chunk_data(idx_rdata),
    .wr_en(dwr_en), .wr_addr(dwr_addr), .wr_data(dwr_data)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      idx_addr <= '0; chunk_valid <= 1'b0; dec_half_q <= 1'b0;
    end else begin
      chunk_valid <= chunk_req;
      if (layer_start)    idx_addr <= '0;
      else if (chunk_req) idx_addr <= idx_addr + 1'b1;
      if (dec_start)      dec_half_q <= dec_half;
    end
  assign idx_re = chunk_req;

  // ---------------- step 2: indexed accumulation ----------------
  logic [SA_W-1:0] s;            // position in block: row * BS_COL + col
  logic [PA_W-1:0] base_q;
  logic            first_q, half_q;
  int unsigned     r, k, i;
  idx_t            idx;
  logic [SA_W-1:0] ppi_addr;

  assign r = int'(s) / BS_COL;
  assign k = int'(s) % BS_COL;
  assign i = (r + COL) % BS_ROW;
  assign ppi_addr = SA_W'(i * BS_COL + k);

  ppi_buffer #(.BS_ROW(BS_ROW), .BS_COL(BS_COL)) u_ppi (
    .clk, .wr_en(dwr_en), .wr_half(dec_half_q), .wr_addr(dwr_addr), .wr_data(dwr_data),
    .rd_half(half_q), .rd_addr(ppi_addr), .rd_data(idx)
  );

  assign pp_rd_bank = BW'(i % PE_COLS);
  assign pp_rd_off  = OW'((i / PE_COLS) * UW_MAX + int'(idx));

  logic [PA_W-1:0]          acc_addr;
  logic signed [PSUM_W-1:0] acc_old, acc_new;
  logic                     acc_init;
  logic signed [PSUM_W-1:0] red_out_own;

  assign acc_addr = base_q + PA_W'(k);
  assign acc_init = first_q && (r == 0);
  assign acc_new  = (acc_init ? '0 : acc_old) + PSUM_W'(pp_rd_data);

  psum_buffer #(.ENTRIES(PSUM_ENTRIES), .W(PSUM_W)) u_psum (
    .clk, .wr_en(cmp_busy), .wr_addr(acc_addr), .wr_data(acc_new),
    .a_addr(acc_addr), .a_data(acc_old),
    .r_addr(red_addr), .r_data(red_out_own)
  );

  assign red_out = red_in + red_out_own;

  assign cmp_done = cmp_busy && (s == SA_W'(NIDX - 1));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cmp_busy <= 1'b0; s <= '0; base_q <= '0; first_q <= 1'b0; half_q <= 1'b0;
    end else if (cmp_start) begin
      cmp_busy <= 1'b1; s <= '0; base_q <= cmp_base; first_q <= cmp_first; half_q <= cmp_half;
    end else if (cmp_busy) begin
      s <= s + 1'b1;
      if (cmp_done) cmp_busy <= 1'b0;
    end

  assert property (@(posedge clk) disable iff (!rst_n) !(cmp_start && cmp_busy && !cmp_done))
    else $error("step-2 start while a block is running");
  assert property (@(posedge clk) disable iff (!rst_n) !(dec_start && dec_busy))
    else $error("decode start while decoding");
endmodule
