// crew_top: the CREW fully-connected-layer accelerator.
//
// CREW replaces every weight of an FC layer by a short index into the list of
// distinct ("unique") weights of that weight's input neuron. Step 1 multiplies
// each input only by its unique weights and keeps the products in a buffer
// shared by a row of PEs; step 2 rebuilds every dot product by adding the
// products the indexes select. Because inputs typically meet only a few dozen
// unique weights, almost all multiplications disappear and indexes need fewer
// bits than the weights they replace.
//
// Structure (a PE_ROWS x PE_COLS array, 16 x 16 by default):
//  * global buffers, each double buffered (`swap` exchanges the halves the
//    memory side and the array side see): per PE row an input bank
//    ({count-1, value} words) and a unique-weight bank (PE_COLS weights per
//    word); per PE an index bank (compressed index blocks, CHUNK_W-bit words);
//    per PE column an output bank (PSUM_W-bit results);
//  * per PE row a step-1 engine (pp_row_engine) and a shared partial product
//    buffer (pp_buffer);
//  * per PE: multiplier, adder, index decoder, indirections buffer, partial
//    sum buffer (pe);
//  * the control unit (crew_ctrl) overlapping step 1, index decoding and
//    step 2, and finishing with the top-to-bottom reduction into the output
//    banks.
// Main memory and its bus are outside: the fill port writes the memory-side
// half of any input, unique-weight or index bank; the drain port reads the
// memory-side half of an output bank (data one cycle later).
// A layer is run by filling the banks, pulsing `swap`, then pulsing `start`
// with n_groups (input groups of PE_ROWS*BS_ROW inputs) and n_iters (output
// iterations of PE_COLS*BS_COL outputs); `done` pulses at the end; a second
// `swap` makes the outputs visible to the drain port.
// The paper gives the array, the shared banked partial product buffer, the
// per-PE buffers, their sizes (Table of parameters: 16 x 16 PEs, 16 x 16
// blocks, 0.5 KB / 1 KB / 0.75 KB per PE, 24 MB of global SRAM) and the
// dataflow. How the 24 MB is split between the global buffers, the bank
// layout, word formats and port protocol are this design's choices:
// 2 MiB inputs, 4 MiB unique weights, 16 MiB indexes, 1.5 MiB outputs.
// fill_addr is a plain 32-bit word address; each bank uses only the low bits
// it needs, so lint reports the upper bits as unused. The step-1 engines'
// busy and the PEs' pp_valid outputs are left open: the control unit uses the
// done pulses and the row engine times the products itself. Lint notes that
// rst_n is used both as the asynchronous reset and in the assertions'
// `disable iff`; that is intended.
module crew_top
  import crew_pkg::*;
#(
  parameter int unsigned PE_ROWS      = 16,
  parameter int unsigned PE_COLS      = 16,
  parameter int unsigned BS_ROW       = 16,
  parameter int unsigned BS_COL       = 16,
  parameter int unsigned PSUM_ENTRIES = 256,
  parameter int unsigned PSUM_W       = 24,
  parameter int unsigned CHUNK_W      = 32,
  parameter int unsigned IN_DEPTH     = 65536,   // words per input bank (both halves)
  parameter int unsigned UW_DEPTH     = 16384,   // words per unique-weight bank
  parameter int unsigned IDX_DEPTH    = 16384,   // words per index bank
  parameter int unsigned OUT_DEPTH    = 32768,   // words per output bank
  localparam int unsigned NPE    = PE_ROWS * PE_COLS,
  localparam int unsigned IN_AW  = $clog2(IN_DEPTH / 2),
  localparam int unsigned UW_AW  = $clog2(UW_DEPTH / 2),
  localparam int unsigned IDX_AW = $clog2(IDX_DEPTH / 2),
  localparam int unsigned OUT_AW = $clog2(OUT_DEPTH / 2),
  localparam int unsigned GRP_W  = IN_AW,
  localparam int unsigned PA_W   = $clog2(PSUM_ENTRIES),
  localparam int unsigned IT_W   = PA_W + 1,
  localparam int unsigned FB_W   = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int unsigned DB_W   = (PE_COLS > 1) ? $clog2(PE_COLS) : 1,
  localparam int unsigned FD_W   = (PE_COLS * Q_W > CHUNK_W) ? PE_COLS * Q_W : CHUNK_W,
  localparam int unsigned OW     = $clog2((BS_ROW / PE_COLS) * UW_MAX),
  localparam int unsigned BW     = (PE_COLS > 1) ? $clog2(PE_COLS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     swap,
  // memory-side fill port
  input  logic                     fill_we,
  input  fill_target_e             fill_target,
  input  logic [FB_W-1:0]          fill_bank,   // row (input, uw) or r*PE_COLS+c (index)
  input  logic [31:0]              fill_addr,
  input  logic [FD_W-1:0]          fill_data,
  // memory-side drain port
  input  logic                     drain_re,
  input  logic [DB_W-1:0]          drain_bank,
  input  logic [OUT_AW-1:0]        drain_addr,
  output logic signed [PSUM_W-1:0] drain_data,
  // layer control
  input  logic                     start,
  input  logic [GRP_W-1:0]         n_groups,
  input  logic [IT_W-1:0]          n_iters,
  output logic                     busy,
  output logic                     done,
  // activity status
  output logic                     st_step1,
  output logic                     st_dec,
  output logic                     st_cmp,
  output logic                     st_red,
  output logic                     st_wait_pp,
  output logic                     st_wait_ppi
);
  // ---------------- control ----------------
  logic               layer_start, s1_start, s1_half, dec_start, dec_half;
  logic               cmp_start, cmp_half, cmp_pp_half, cmp_first, out_we;
  logic [GRP_W-1:0]   s1_grp;
  logic [PA_W-1:0]    cmp_base, red_addr;
  logic [PE_ROWS-1:0] s1_done;
  logic [NPE-1:0]     dec_done;
  logic               cmp_done [PE_ROWS][PE_COLS];
  logic               cmp_busy [PE_ROWS][PE_COLS];

  crew_ctrl #(.PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS), .BS_COL(BS_COL),
              .PSUM_ENTRIES(PSUM_ENTRIES), .GRP_W(GRP_W)) u_ctrl (
    .clk, .rst_n, .start, .n_groups, .n_iters, .busy, .done, .layer_start,
    .s1_start, .s1_grp, .s1_half, .s1_done,
    .dec_start, .dec_half, .dec_done,
    .cmp_start, .cmp_half, .cmp_pp_half, .cmp_base, .cmp_first, .cmp_done(cmp_done[0][0]),
    .red_addr, .out_we,
    .st_step1, .st_dec, .st_cmp, .st_red, .st_wait_pp, .st_wait_ppi
  );


  // ---------------- rows ----------------
  for (genvar r = 0; r < PE_ROWS; r++) begin : g_row
    logic                   in_re, uw_re;
    logic [IN_AW-1:0]       in_addr;
    logic [UW_AW-1:0]       uw_addr;
    logic [2*Q_W-1:0]       in_rdata, in_unused;
    logic [PE_COLS*Q_W-1:0] uw_rdata, uw_unused;
    logic                   mul_valid;
    q_t                     mul_x;
    q_t                     mul_w [PE_COLS];
    pp_t                    pp_prod [PE_COLS];
    logic                   pp_we, pp_whalf;
    logic [BW-1:0]          pp_wbank;
    logic [OW-1:0]          pp_woff;
    logic [PE_COLS-1:0]     pp_wmask;
    pp_t                    pp_wdata [PE_COLS];
    logic [BW-1:0]          pp_rbank [PE_COLS];
    logic [OW-1:0]          pp_roff  [PE_COLS];
    pp_t                    pp_rdata [PE_COLS];
    logic signed [PSUM_W-1:0] red_o [PE_COLS];   // this row's reduction outputs

    global_buffer #(.WIDTH(2*Q_W), .DEPTH(IN_DEPTH)) u_in (
      .clk, .rst_n, .swap,
      .a_we(fill_we && fill_target == FILL_INPUT && fill_bank == FB_W'(r)),
      .a_re(1'b0), .a_addr(fill_addr[IN_AW-1:0]), .a_wdata(fill_data[2*Q_W-1:0]), .a_rdata(in_unused),
      .b_we(1'b0), .b_re(in_re), .b_addr(in_addr), .b_wdata('0), .b_rdata(in_rdata)
    );
    global_buffer #(.WIDTH(PE_COLS*Q_W), .DEPTH(UW_DEPTH)) u_uw (
      .clk, .rst_n, .swap,
      .a_we(fill_we && fill_target == FILL_UW && fill_bank == FB_W'(r)),
      .a_re(1'b0), .a_addr(fill_addr[UW_AW-1:0]), .a_wdata(fill_data[PE_COLS*Q_W-1:0]), .a_rdata(uw_unused),
      .b_we(1'b0), .b_re(uw_re), .b_addr(uw_addr), .b_wdata('0), .b_rdata(uw_rdata)
    );

    pp_row_engine #(.PE_COLS(PE_COLS), .BS_ROW(BS_ROW), .IN_AW(IN_AW), .UW_AW(UW_AW),
                    .GRP_W(GRP_W)) u_s1 (
      .clk, .rst_n, .layer_start, .start(s1_start), .grp(s1_grp), .half(s1_half),
      .busy(), .done(s1_done[r]),
      .in_re, .in_addr, .in_rdata, .uw_re, .uw_addr, .uw_rdata,
      .mul_valid, .mul_x, .mul_w, .pp_in(pp_prod),
      .pp_we, .pp_half(pp_whalf), .pp_bank(pp_wbank), .pp_off(pp_woff), .pp_mask(pp_wmask),
      .pp_wdata
    );

    pp_buffer #(.PE_COLS(PE_COLS), .BS_ROW(BS_ROW)) u_ppb (
      .clk, .rst_n,
      .wr_en(pp_we), .wr_half(pp_whalf), .wr_bank(pp_wbank), .wr_off(pp_woff),
      .wr_mask(pp_wmask), .wr_data(pp_wdata),
      .rd_en(cmp_busy[r][0]), .rd_half(cmp_pp_half), .rd_bank(pp_rbank), .rd_off(pp_roff),
      .rd_data(pp_rdata)
    );

    for (genvar c = 0; c < PE_COLS; c++) begin : g_col
      logic                 idx_re;
      logic [IDX_AW-1:0]    idx_addr;
      logic [CHUNK_W-1:0]   idx_rdata, idx_unused;
      logic signed [PSUM_W-1:0] red_i;

      // reduction chain, top to bottom of each column
      if (r == 0) begin : g_first
        assign red_i = '0;
      end else begin : g_next
        assign red_i = g_row[r-1].red_o[c];
      end

      global_buffer #(.WIDTH(CHUNK_W), .DEPTH(IDX_DEPTH)) u_idx (
        .clk, .rst_n, .swap,
        .a_we(fill_we && fill_target == FILL_INDEX && fill_bank == FB_W'(r*PE_COLS + c)),
        .a_re(1'b0), .a_addr(fill_addr[IDX_AW-1:0]), .a_wdata(fill_data[CHUNK_W-1:0]),
        .a_rdata(idx_unused),
        .b_we(1'b0), .b_re(idx_re), .b_addr(idx_addr), .b_wdata('0), .b_rdata(idx_rdata)
      );

      pe #(.COL(c), .PE_COLS(PE_COLS), .BS_ROW(BS_ROW), .BS_COL(BS_COL),
           .PSUM_ENTRIES(PSUM_ENTRIES), .PSUM_W(PSUM_W), .CHUNK_W(CHUNK_W),
           .IDX_AW(IDX_AW)) u_pe (
        .clk, .rst_n, .layer_start,
        .mul_valid, .mul_x, .mul_w(mul_w[c]), .pp_out(pp_prod[c]), .pp_valid(),
        .dec_start, .dec_half, .dec_done(dec_done[r*PE_COLS + c]),
        .idx_re, .idx_addr, .idx_rdata,
        .cmp_start, .cmp_half, .cmp_base, .cmp_first,
        .cmp_busy(cmp_busy[r][c]), .cmp_done(cmp_done[r][c]),
        .pp_rd_bank(pp_rbank[c]), .pp_rd_off(pp_roff[c]), .pp_rd_data(pp_rdata[c]),
        .red_addr, .red_in(red_i), .red_out(red_o[c])
      );
    end
  end

  // ---------------- output banks ----------------
  logic signed [PSUM_W-1:0] out_rdata [PE_COLS];
  logic [DB_W-1:0]          drain_bank_q;

  for (genvar c = 0; c < PE_COLS; c++) begin : g_out
    logic [PSUM_W-1:0] b_unused;
    global_buffer #(.WIDTH(PSUM_W), .DEPTH(OUT_DEPTH)) u_out (
      .clk, .rst_n, .swap,
      .a_we(1'b0), .a_re(drain_re && drain_bank == DB_W'(c)), .a_addr(drain_addr),
      .a_wdata('0), .a_rdata(out_rdata[c]),
      .b_we(out_we), .b_re(1'b0), .b_addr(OUT_AW'(red_addr)), .b_wdata(g_row[PE_ROWS-1].red_o[c]),
      .b_rdata(b_unused)
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        drain_bank_q <= '0;
    else if (drain_re) drain_bank_q <= drain_bank;
  assign drain_data = out_rdata[drain_bank_q];

  initial begin
    assert (BS_ROW % PE_COLS == 0) else $error("BS_ROW must be a multiple of PE_COLS");
    assert (PSUM_ENTRIES >= BS_COL) else $error("PSUM_ENTRIES must hold one block of outputs");
  end
endmodule
