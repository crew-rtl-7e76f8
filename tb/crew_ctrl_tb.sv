// crew_ctrl_tb: self-checking test of the CREW control unit.
//
// The row engines, the index decoders and the PE array are replaced by small
// models: each row engine and each decoder answers its start with a done
// pulse after a random delay, and the array answers cmp_start by staying busy
// for exactly BS_ROW * BS_COL cycles, as a real block takes. Three layers are
// run: one where step 1 is slow (step 2 must wait for partial products), one
// where decoding is slow (step 2 must wait for indirections), and one where
// both are fast (step 2 runs back to back). The test checks
//   * the block order (g, t), the buffer halves, base address and first flag
//     handed to step 2;
//   * that no half is refilled before step 2 has released it, and that step 2
//     never starts on a half that is not filled;
//   * the reduction address sequence and the done pulse;
//   * that step 1 and decoding overlap step 2, and that both wait states occur;
//   * the step-2 busy time, blocks * BS_ROW * BS_COL cycles, and, when both
//     producers are fast, at most one idle cycle between blocks.
module crew_ctrl_tb;
  localparam int unsigned PE_ROWS = 2, PE_COLS = 2, BS_ROW = 4, BS_COL = 4;
  localparam int unsigned PSUM_ENTRIES = 16, GRP_W = 4;
  localparam int unsigned PA_W = $clog2(PSUM_ENTRIES), IT_W = PA_W + 1;
  localparam int unsigned NPE = PE_ROWS * PE_COLS, NIDX = BS_ROW * BS_COL;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [GRP_W-1:0] n_groups = '0;
  logic [IT_W-1:0]  n_iters = '0;
  logic busy, done, layer_start;
  logic s1_start, s1_half; logic [GRP_W-1:0] s1_grp; logic [PE_ROWS-1:0] s1_done;
  logic dec_start, dec_half; logic [NPE-1:0] dec_done;
  logic cmp_start, cmp_half, cmp_pp_half, cmp_first, cmp_done;
  logic [PA_W-1:0] cmp_base, red_addr;
  logic out_we, st_step1, st_dec, st_cmp, st_red, st_wait_pp, st_wait_ppi;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  crew_ctrl #(.PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS), .BS_COL(BS_COL),
              .PSUM_ENTRIES(PSUM_ENTRIES), .GRP_W(GRP_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t: FAIL %s", $time, what);
    end
  endtask

  // ---------------------------------------------------------------- models
  int s1_max = 4, dec_max = 4;          // random delay ranges of the producers
  int s1_cnt [PE_ROWS];                 // countdown per row engine, -1 idle
  int dec_cnt[NPE];
  int c_cnt = -1;                       // step-2 cycle counter, -1 idle
  // progress counters seen by the checker
  int g_started, g_filled, b_dec_started, b_dec_filled, b_cmp_started, b_cmp_done;
  int cur_b;
  bit exp_pp_half_chk;
  int exp_pp_half;
  // statistics
  int n_ovl_s1, n_ovl_dec, n_wait_pp, n_wait_ppi, cmp_busy_cycles, gap_cycles;
  int red_next;
  bit in_gap;

  assign cmp_done = (c_cnt == NIDX - 1);

  always_ff @(posedge clk) begin
    automatic int all_s1 = 1, all_dec = 1;
    s1_done  <= '0;
    dec_done <= '0;
    for (int r = 0; r < PE_ROWS; r++) begin
      if (s1_start) s1_cnt[r] <= 1 + ($urandom % s1_max);
      else if (s1_cnt[r] > 0) s1_cnt[r] <= s1_cnt[r] - 1;
      if (!s1_start && s1_cnt[r] == 1) s1_done[r] <= 1'b1;
    end
    for (int p = 0; p < NPE; p++) begin
      if (dec_start) dec_cnt[p] <= 1 + ($urandom % dec_max);
      else if (dec_cnt[p] > 0) dec_cnt[p] <= dec_cnt[p] - 1;
      if (!dec_start && dec_cnt[p] == 1) dec_done[p] <= 1'b1;
    end
    if (cmp_start) c_cnt <= 0;
    else if (c_cnt == NIDX - 1) c_cnt <= -1;
    else if (c_cnt >= 0) c_cnt <= c_cnt + 1;
  end

  // --------------------------------------------------------------- checker
  always @(posedge clk) if (rst_n) begin
    if (exp_pp_half_chk) begin
      check(cmp_pp_half == exp_pp_half[0], "partial product half latched for step 2");
      exp_pp_half_chk = 0;
    end
    if (s1_start) begin
      check(s1_grp == GRP_W'(g_started), "step-1 group order");
      check(s1_half == g_started[0], "step-1 half");
      // the half is free only once every block of group g-2 is done
      check(g_started < 2 || b_cmp_done >= (g_started - 1) * int'(n_iters),
            "partial product half refilled before step 2 released it");
      g_started++;
    end
    if (dec_start) begin
      check(dec_half == b_dec_started[0], "decode half");
      check(b_dec_started < 2 || b_cmp_done >= b_dec_started - 1,
            "indirection half refilled before step 2 released it");
      b_dec_started++;
    end
    if (cmp_start) begin
      automatic int g = b_cmp_started / int'(n_iters);
      automatic int t = b_cmp_started % int'(n_iters);
      check(cmp_half == b_cmp_started[0], "step-2 indirection half");
      check(cmp_base == PA_W'(t * BS_COL), "step-2 partial-sum base");
      check(cmp_first == (g == 0), "step-2 first-group flag");
      check(g_filled > g, "step 2 started before its partial products were ready");
      check(b_dec_filled > b_cmp_started, "step 2 started before its indirections were ready");
      check(c_cnt == -1 || cmp_done, "step 2 started while the array was busy");
      exp_pp_half = g; exp_pp_half_chk = 1;
      b_cmp_started++;
      in_gap = 0;
    end
    if (cmp_done) b_cmp_done++;
    if (c_cnt >= 0) cmp_busy_cycles++;
    if (st_step1 && st_cmp) n_ovl_s1++;
    if (st_dec && st_cmp) n_ovl_dec++;
    if (st_wait_pp) n_wait_pp++;
    if (st_wait_ppi) n_wait_ppi++;
    if (out_we) begin
      check(b_cmp_done == int'(n_groups) * int'(n_iters), "reduction before the last block");
      check(red_addr == PA_W'(red_next), "reduction address order");
      red_next++;
    end
  end
  // count the completion of producers from the dut's own flags
  always @(posedge clk) if (rst_n) begin
    if (dut.s1_fin) g_filled++;
    if (dut.d_fin) b_dec_filled++;
  end

  // ------------------------------------------------------------------ runs
  task automatic run_layer(input int G, input int T, input int smax, input int dmax,
                           input bit check_rate);
    int cyc;
    s1_max = smax; dec_max = dmax;
    g_started = 0; g_filled = 0; b_dec_started = 0; b_dec_filled = 0;
    b_cmp_started = 0; b_cmp_done = 0; red_next = 0; cmp_busy_cycles = 0;
    n_groups = GRP_W'(G); n_iters = IT_W'(T);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    check(b_cmp_done == G * T, "all blocks computed");
    check(red_next == T * BS_COL, "reduction length");
    check(cmp_busy_cycles == G * T * NIDX, "step-2 busy cycles = blocks * BS_ROW * BS_COL");
    if (check_rate)
      // one idle cycle between blocks; a little head start for the first block
      check(cyc <= G * T * (NIDX + 1) + T * BS_COL + 2 * dmax + 2 * smax + 8,
            $sformatf("compute-bound layer took %0d cycles", cyc));
    @(posedge clk);
    check(!busy, "busy cleared after done");
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < PE_ROWS; r++) s1_cnt[r] = -1;
    for (int p = 0; p < NPE; p++) dec_cnt[p] = -1;
    g_started = 0; g_filled = 0; b_dec_started = 0; b_dec_filled = 0;
    b_cmp_started = 0; b_cmp_done = 0; red_next = 0; exp_pp_half_chk = 0;
    n_ovl_s1 = 0; n_ovl_dec = 0; n_wait_pp = 0; n_wait_ppi = 0; cmp_busy_cycles = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    run_layer(5, 2, 120, 3, 0);     // step 1 slow: waits for partial products
    begin
      automatic int w = n_wait_pp;
      check(w > 0, "step 2 waited for step 1");
    end
    run_layer(3, 4, 3, 60, 0);      // decoding slow: waits for indirections
    check(n_wait_ppi > 0, "step 2 waited for the decoder");
    run_layer(4, 4, 6, 6, 1);       // both fast: compute bound
    run_layer(1, 1, 2, 2, 1);       // single block
    check(n_ovl_s1 > 0, "step 1 overlapped step 2");
    check(n_ovl_dec > 0, "decoding overlapped step 2");
    $display("overlap s1=%0d dec=%0d waits pp=%0d ppi=%0d", n_ovl_s1, n_ovl_dec, n_wait_pp, n_wait_ppi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
