// psum_buffer: the Partial Sum Buffer of one PE.
//
// One entry per output neuron the PE is responsible for. Over a layer, a PE
// computes BS_COL outputs in each output iteration, so ENTRIES / BS_COL
// iterations fit; every input group adds into the same entries. The default of
// 256 entries of 24 bits is 0.75 KB, the per-PE size the paper lists; the
// 24-bit width is derived from that size, not stated by the paper.
//
// Ports: one write port, and two combinational read ports: port A serves the
// PE's accumulate (read-modify-write in one cycle), port R serves the
// top-to-bottom output reduction.
module psum_buffer #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned W       = 24,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic signed [W-1:0] wr_data,
  input  logic [AW-1:0]       a_addr,
  output logic signed [W-1:0] a_data,
  input  logic [AW-1:0]       r_addr,
  output logic signed [W-1:0] r_data
);
  logic signed [W-1:0] mem [ENTRIES];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  assign a_data = mem[a_addr];
  assign r_data = mem[r_addr];
endmodule
