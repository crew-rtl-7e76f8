// crew_pkg: types and constants shared by the CREW accelerator.
//
// CREW computes a fully-connected layer in two steps. Step 1 multiplies every
// input only by the few distinct ("unique") weights it meets and memoizes the
// products. Step 2 rebuilds every dot product by adding memoized products,
// selected by small per-weight indexes that replace the original weights.
// This package fixes the arithmetic formats of those two steps:
//   * inputs and unique weights are 8-bit signed integers (8-bit linear
//     quantization, as in the paper);
//   * a partial product is 16 bits, as the paper states for the worst case;
//   * an index is at most 8 bits (at most 256 unique weights per input) and is
//     stored padded to 8 bits once decoded, as the paper states;
//   * the width of every index of one input neuron is given by a 3-bit code,
//     the paper's "single value of three bits per input neuron". The encoding
//     (width = code + 1) is this design's choice.
// Signed two's-complement operands are this design's choice; the paper only
// says "quantized to 8-bit integers".
package crew_pkg;

  localparam int unsigned Q_W      = 8;    // quantized input / weight width
  localparam int unsigned PP_W     = 16;   // partial product width
  localparam int unsigned IDX_W    = 8;    // decoded (padded) index width
  localparam int unsigned SIZE_W   = 3;    // index-size code per input neuron
  localparam int unsigned UW_MAX   = 256;  // most unique weights one input can have

  typedef logic signed [Q_W-1:0]  q_t;
  typedef logic signed [PP_W-1:0] pp_t;
  typedef logic [IDX_W-1:0]       idx_t;
  typedef logic [SIZE_W-1:0]      size_code_t;

  // Which global buffer a DRAM-side fill access targets.
  typedef enum logic [1:0] {
    FILL_INPUT  = 2'd0,   // input value + unique-weight count, one bank per PE row
    FILL_UW     = 2'd1,   // unique weights, one bank per PE row
    FILL_INDEX  = 2'd2    // compressed index blocks, one bank per PE
  } fill_target_e;

  // Index width in bits encoded by a 3-bit size code.
  function automatic int unsigned idx_bits(size_code_t c);
    return int'(c) + 1;
  endfunction

  // Smallest size code able to address `n_uw` unique weights (1..256).
  function automatic size_code_t size_code_for(int unsigned n_uw);
    int unsigned b;
    b = 1;
    while ((1 << b) < n_uw) b++;
    return size_code_t'(b - 1);
  endfunction

endpackage
