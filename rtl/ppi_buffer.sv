// ppi_buffer: the Partial Product Indirections buffer of one PE.
//
// Holds decoded (8-bit padded) indexes of one BS_ROW x BS_COL block per half.
// It is double buffered, as the paper requires, so that the index decoder can
// fill one half with the next block while the PE's adder walks the other.
// With the default 16 x 16 block this is 2 x 256 bytes = 0.5 KB, the size the
// paper lists per PE.
//
// Interface: the write port (from the decoder) names its half explicitly, and
// so does the read port (from the PE's step-2 sequencer). Writes land at the
// clock edge; reads are combinational (a small register file). Which half is
// which at any time is decided by the control unit; the buffer keeps no state
// of its own about it. The addressing (row * BS_COL + col) is this design's
// choice.
module ppi_buffer
  import crew_pkg::*;
#(
  parameter int unsigned BS_ROW = 16,
  parameter int unsigned BS_COL = 16,
  localparam int unsigned NIDX  = BS_ROW * BS_COL,
  localparam int unsigned AW    = $clog2(NIDX)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_half,
  input  logic [AW-1:0] wr_addr,
  input  idx_t          wr_data,
  input  logic          rd_half,
  input  logic [AW-1:0] rd_addr,
  output idx_t          rd_data
);
  idx_t mem [2][NIDX];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_half][wr_addr] <= wr_data;

  assign rd_data = mem[rd_half][rd_addr];
endmodule
