// pp_buffer: the Partial Product Buffer shared by the PEs of one array row.
//
// Step 1 memoizes here the products of each input neuron with each of its
// unique weights; step 2 reads them back through the decoded indexes. As in
// the paper, the buffer has one bank per PE column, each bank holds the
// partial products of BS_ROW / PE_COLS input neurons, room is kept for the
// worst case of 256 unique weights per input, products are 16 bits, and the
// whole buffer is double buffered. With the defaults (16 x 16 PEs, 16 x 16
// blocks) that is 16 banks x 256 x 16 bit x 2 halves = 1 KB per PE.
//
// Placement: input neuron i of the block (0..BS_ROW-1) lives in bank
// i % PE_COLS at offset (i / PE_COLS) * 256 + unique-weight number.
// Step-2 sequencers in different columns start on different block rows, so in
// any cycle the PEs of a row read distinct banks (the paper's collision-free
// offsets). An assertion checks that.
//
// Write port (step 1): up to PE_COLS products of one input neuron at
// consecutive offsets per cycle, one from each PE of the row (wr_mask selects
// lanes). This wide write into one bank is this design's choice: the paper
// says every PE of the row stores its product but not how the banks accept
// them. Read ports (step 2): one per PE column, combinational.
module pp_buffer
  import crew_pkg::*;
#(
  parameter int unsigned PE_COLS = 16,
  parameter int unsigned BS_ROW  = 16,
  localparam int unsigned NPB    = BS_ROW / PE_COLS,     // inputs per bank
  localparam int unsigned DEPTH  = NPB * UW_MAX,         // words per bank per half
  localparam int unsigned OW     = $clog2(DEPTH),
  localparam int unsigned BW     = (PE_COLS > 1) ? $clog2(PE_COLS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // step-1 write
  input  logic                wr_en,
  input  logic                wr_half,
  input  logic [BW-1:0]       wr_bank,
  input  logic [OW-1:0]       wr_off,
  input  logic [PE_COLS-1:0]  wr_mask,
  input  pp_t                 wr_data [PE_COLS],
  // step-2 reads, one per PE column
  input  logic                rd_en,
  input  logic                rd_half,
  input  logic [BW-1:0]       rd_bank [PE_COLS],
  input  logic [OW-1:0]       rd_off  [PE_COLS],
  output pp_t                 rd_data [PE_COLS]
);
  pp_t mem [PE_COLS][2][DEPTH];

  always_ff @(posedge clk)
    if (wr_en)
      for (int l = 0; l < PE_COLS; l++)
        if (wr_mask[l]) mem[wr_bank][wr_half][wr_off + OW'(l)] <= wr_data[l];

  always_comb
    for (int c = 0; c < PE_COLS; c++)
      rd_data[c] = mem[rd_bank[c]][rd_half][rd_off[c]];

  // Each bank serves one reader per cycle.
  for (genvar c = 0; c < PE_COLS; c++) begin : g_conflict
    for (genvar d = c + 1; d < PE_COLS; d++) begin : g_pair
      assert property (@(posedge clk) disable iff (!rst_n)
                       rd_en |-> rd_bank[c] != rd_bank[d])
        else $error("bank conflict between PE columns %0d and %0d", c, d);
    end
  end

  initial assert (BS_ROW % PE_COLS == 0) else $error("BS_ROW must be a multiple of PE_COLS");
endmodule
