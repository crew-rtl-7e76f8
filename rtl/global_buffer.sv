// global_buffer: one bank of the accelerator's global on-chip SRAM.
//
// The global buffers (inputs, unique weights, index blocks, outputs) are
// double buffered so that main memory can load the next layer's data, or
// drain the previous layer's results, while the array computes. This bank
// holds DEPTH words split into two halves of DEPTH/2. A one-bit `sel` chooses
// the half the array side (port B) sees; the memory side (port A) always sees
// the other half. A one-cycle `swap` pulse exchanges them.
//
// Both ports are synchronous: a read issued in cycle t returns data in
// cycle t+1; a write lands at the clock edge. Addresses are within a half.
// The paper states double buffering and heavy banking; the two-port
// organisation, the swap pulse and the 1-cycle read latency are this design's
// choices.
module global_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024,          // words, both halves together
  localparam int unsigned AW   = $clog2(DEPTH/2)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             swap,
  // memory (DRAM) side, works on half ~sel
  input  logic             a_we,
  input  logic             a_re,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // array side, works on half sel
  input  logic             b_we,
  input  logic             b_re,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic sel;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= ~sel;

  always_ff @(posedge clk) begin
    if (a_we) mem[{~sel, a_addr}] <= a_wdata;
    if (b_we) mem[{sel, b_addr}]  <= b_wdata;
    if (a_re) a_rdata <= mem[{~sel, a_addr}];
    if (b_re) b_rdata <= mem[{sel, b_addr}];
  end

  initial assert (DEPTH == 2 * (1 << AW)) else $error("DEPTH must be twice a power of two");
endmodule
