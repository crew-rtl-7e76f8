// crew_ctrl: control unit of the CREW accelerator for one FC layer.
//
// A layer with N inputs and M outputs is cut into input groups of
// PE_ROWS * BS_ROW inputs (n_groups of them) and output iterations of
// PE_COLS * BS_COL outputs (n_iters of them); block (g, t) of PE (r, c) covers
// inputs g*PE_ROWS*BS_ROW + r*BS_ROW + 0..BS_ROW-1 and outputs
// t*PE_COLS*BS_COL + c*BS_COL + 0..BS_COL-1. Blocks are processed in the order
// g = 0.., and for each g, t = 0..n_iters-1. The sizes must be padded offline
// to whole groups and iterations, and n_iters * BS_COL <= PSUM_ENTRIES.
//
// Three activities run concurrently, as in the paper's two-step flowchart,
// linked by full/empty flags of double buffers:
//  * step 1 (row engines) fills partial product half g % 2 with group g, once
//    that half is empty;
//  * index decoding (all PEs) fills indirections half b % 2 with block b, once
//    that half is empty;
//  * step 2 (all PEs, in lockstep) runs block b = (g, t) once indirections
//    half b % 2 and partial product half g % 2 are full; it frees the
//    indirections half at the end of every block and the partial product half
//    after the last iteration of the group.
// After the last block, the reduction reads partial-sum entry e = 0 ..
// n_iters*BS_COL-1 of every PE, one per cycle, and the sum down each PE
// column is written to output bank c at address e (output neuron
// t*PE_COLS*BS_COL + c*BS_COL + k for e = t*BS_COL + k). `done` then pulses.
//
// Step 2 leaves one idle cycle between blocks; a block takes BS_ROW * BS_COL
// cycles. Status outputs tell when each activity is running and when step 2
// waits for step 1 or for the decoder.
// The paper gives the two steps, their overlap through double buffering and
// the final reduction; the flag protocol and block order are this design's.
// rst_n is the asynchronous reset and also disables the assertions
// (`disable iff`); lint reports that double use, which is intended.
module crew_ctrl #(
  parameter int unsigned PE_ROWS      = 16,
  parameter int unsigned PE_COLS      = 16,
  parameter int unsigned BS_COL       = 16,
  parameter int unsigned PSUM_ENTRIES = 256,
  parameter int unsigned GRP_W        = 12,
  localparam int unsigned PA_W        = $clog2(PSUM_ENTRIES),
  localparam int unsigned IT_W        = PA_W + 1,
  localparam int unsigned NPE         = PE_ROWS * PE_COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [GRP_W-1:0]   n_groups,
  input  logic [IT_W-1:0]    n_iters,
  output logic               busy,
  output logic               done,
  output logic               layer_start,
  // step 1
  output logic               s1_start,
  output logic [GRP_W-1:0]   s1_grp,
  output logic               s1_half,
  input  logic [PE_ROWS-1:0] s1_done,
  // decode
  output logic               dec_start,
  output logic               dec_half,
  input  logic [NPE-1:0]     dec_done,
  // step 2
  output logic               cmp_start,
  output logic               cmp_half,
  output logic               cmp_pp_half,
  output logic [PA_W-1:0]    cmp_base,
  output logic               cmp_first,
  input  logic               cmp_done,
  // reduction and output write
  output logic [PA_W-1:0]    red_addr,
  output logic               out_we,
  // status
  output logic               st_step1,
  output logic               st_dec,
  output logic               st_cmp,
  output logic               st_red,
  output logic               st_wait_pp,
  output logic               st_wait_ppi
);
  localparam int unsigned BLK_W = GRP_W + IT_W;

  logic             active;
  logic [1:0]       pp_full, ppi_full;
  // step 1
  logic             s1_run;
  logic [GRP_W-1:0] s1_g;
  logic [PE_ROWS-1:0] s1_seen;
  // decode
  logic             d_run;
  logic [BLK_W-1:0] d_n, total;
  logic [NPE-1:0]   d_seen;
  // step 2
  logic             c_run;
  logic [BLK_W-1:0] c_n;
  logic [GRP_W-1:0] c_g;
  logic [IT_W-1:0]  c_t;
  // reduction
  logic             r_run;
  logic [PA_W:0]    r_e, r_last;

  assign total  = BLK_W'(n_groups) * BLK_W'(n_iters);
  assign r_last = (PA_W+1)'(n_iters * IT_W'(BS_COL)) - 1'b1;

  logic s1_go, s1_fin, d_go, d_fin, c_go, c_fin, c_grp_end, r_go;
  assign s1_fin    = s1_run && ((s1_seen | s1_done) == '1);
  assign s1_go     = active && !s1_run && (s1_g < n_groups) && !pp_full[s1_g[0]];
  assign d_fin     = d_run && ((d_seen | dec_done) == '1);
  assign d_go      = active && !d_run && (d_n < total) && !ppi_full[d_n[0]];
  assign c_fin     = c_run && cmp_done;
  assign c_grp_end = (c_t == n_iters - 1'b1);
  assign c_go      = active && !c_run && (c_n < total) && ppi_full[c_n[0]] && pp_full[c_g[0]];
  assign r_go      = active && !r_run && !c_run && (c_n == total) && (total != '0);

  assign s1_start  = s1_go;
  assign s1_grp    = s1_g;
  assign s1_half   = s1_g[0];
  assign dec_start = d_go;
  assign dec_half  = d_n[0];
  assign cmp_start = c_go;
  assign cmp_half  = c_n[0];
  assign cmp_base  = PA_W'(c_t * IT_W'(BS_COL));
  assign cmp_first = (c_g == '0);
  assign red_addr  = r_e[PA_W-1:0];
  assign out_we    = r_run;
  assign busy      = active;

  assign st_step1    = s1_run;
  assign st_dec      = d_run;
  assign st_cmp      = c_run;
  assign st_red      = r_run;
  assign st_wait_pp  = active && !c_run && (c_n < total) && ppi_full[c_n[0]] && !pp_full[c_g[0]];
  assign st_wait_ppi = active && !c_run && (c_n < total) && !ppi_full[c_n[0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done <= 1'b0; layer_start <= 1'b0;
      pp_full <= '0; ppi_full <= '0;
      s1_run <= 1'b0; s1_g <= '0; s1_seen <= '0;
      d_run <= 1'b0; d_n <= '0; d_seen <= '0;
      c_run <= 1'b0; c_n <= '0; c_g <= '0; c_t <= '0; cmp_pp_half <= 1'b0;
      r_run <= 1'b0; r_e <= '0;
    end else begin
      done        <= 1'b0;
      layer_start <= 1'b0;
      if (start && !active) begin
        active <= 1'b1; layer_start <= 1'b1;
        pp_full <= '0; ppi_full <= '0;
        s1_g <= '0; d_n <= '0; c_n <= '0; c_g <= '0; c_t <= '0; r_e <= '0;
      end
      // step 1
      if (s1_go) begin s1_run <= 1'b1; s1_seen <= '0; end
      else if (s1_run) s1_seen <= s1_seen | s1_done;
      if (s1_fin) begin
        s1_run <= 1'b0; pp_full[s1_g[0]] <= 1'b1; s1_g <= s1_g + 1'b1;
      end
      // decode
      if (d_go) begin d_run <= 1'b1; d_seen <= '0; end
      else if (d_run) d_seen <= d_seen | dec_done;
      if (d_fin) begin
        d_run <= 1'b0; ppi_full[d_n[0]] <= 1'b1; d_n <= d_n + 1'b1;
      end
      // step 2
      if (c_go) begin c_run <= 1'b1; cmp_pp_half <= c_g[0]; end
      if (c_fin) begin
        c_run <= 1'b0;
        ppi_full[c_n[0]] <= 1'b0;
        c_n <= c_n + 1'b1;
        if (c_grp_end) begin
          pp_full[c_g[0]] <= 1'b0; c_g <= c_g + 1'b1; c_t <= '0;
        end else c_t <= c_t + 1'b1;
      end
      // reduction
      if (r_go) begin r_run <= 1'b1; r_e <= '0; end
      if (r_run) begin
        r_e <= r_e + 1'b1;
        if (r_e == r_last) begin
          r_run <= 1'b0; active <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  // A half is filled only when empty and drained only when full.
  assert property (@(posedge clk) disable iff (!rst_n) s1_go |-> !pp_full[s1_g[0]]);
  assert property (@(posedge clk) disable iff (!rst_n) c_go |-> pp_full[c_g[0]] && ppi_full[c_n[0]]);
  assert property (@(posedge clk) disable iff (!rst_n) start && !active |-> n_iters * IT_W'(BS_COL) <= (IT_W+1)'(PSUM_ENTRIES))
    else $error("layer needs more partial-sum entries than a PE has");
endmodule
