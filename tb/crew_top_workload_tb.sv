// crew_top_workload_tb: end-to-end test of the CREW accelerator (crew_top).
//
// Runs, at the default size, one 1024-input x 256-output layer for each
// evaluated network, with unique-weight counts per input spread around that
// network's average (DS2 38, GNMT 29, Transformer 49, Kaldi 59, PTBLM 43),
// and checks results, step-2 cycles and that the layer is compute bound.
// The testbench keeps its own model of each layer: per input neuron a value,
// a list of unique weights and, per output neuron, an index into that list.
// It packs the data exactly as the hardware expects it (input words
// {count-1, value}; unique weights PE_COLS per word, each input starting a
// new word; per PE a stream of index blocks, each a header of 3-bit size
// codes followed by the indexes of the block packed LSB first, both padded to
// whole chunks), writes it through the fill port, runs the layer, reads the
// results through the drain port and compares them with the dot products
// sum_n x[n] * w[n][idx[n][m]] computed here, wrapped to PSUM_W bits.
// It also checks that step 2 spends exactly BS_ROW * BS_COL cycles per block
// and counts how often each mechanism of the design was exercised.
module crew_top_workload_tb;
  import crew_pkg::*;

  localparam int unsigned PE_ROWS      = 16;
  localparam int unsigned PE_COLS      = 16;
  localparam int unsigned BS_ROW       = 16;
  localparam int unsigned BS_COL       = 16;
  localparam int unsigned PSUM_ENTRIES = 256;
  localparam int unsigned PSUM_W       = 24;
  localparam int unsigned CHUNK_W      = 32;
  localparam int unsigned IN_DEPTH     = 65536;
  localparam int unsigned UW_DEPTH     = 16384;
  localparam int unsigned IDX_DEPTH    = 16384;
  localparam int unsigned OUT_DEPTH    = 32768;
  localparam int unsigned NPE    = PE_ROWS * PE_COLS;
  localparam int unsigned IN_AW  = $clog2(IN_DEPTH / 2);
  localparam int unsigned OUT_AW = $clog2(OUT_DEPTH / 2);
  localparam int unsigned PA_W   = $clog2(PSUM_ENTRIES);
  localparam int unsigned IT_W   = PA_W + 1;
  localparam int unsigned FB_W   = (NPE > 1) ? $clog2(NPE) : 1;
  localparam int unsigned DB_W   = (PE_COLS > 1) ? $clog2(PE_COLS) : 1;
  localparam int unsigned FD_W   = (PE_COLS * Q_W > CHUNK_W) ? PE_COLS * Q_W : CHUNK_W;
  localparam int unsigned HDR_CH = (BS_ROW * SIZE_W + CHUNK_W - 1) / CHUNK_W;

  logic clk = 1'b0, rst_n = 1'b0, swap = 1'b0;
  logic fill_we = 1'b0;
  fill_target_e fill_target = FILL_INPUT;
  logic [FB_W-1:0] fill_bank = '0;
  logic [31:0] fill_addr = '0;
  logic [FD_W-1:0] fill_data = '0;
  logic drain_re = 1'b0;
  logic [DB_W-1:0] drain_bank = '0;
  logic [OUT_AW-1:0] drain_addr = '0;
  logic signed [PSUM_W-1:0] drain_data;
  logic start = 1'b0;
  logic [IN_AW-1:0] n_groups = '0;
  logic [IT_W-1:0] n_iters = '0;
  logic busy, done, st_step1, st_dec, st_cmp, st_red, st_wait_pp, st_wait_ppi;

  always #5 clk = ~clk;

  crew_top dut (
    .clk, .rst_n, .swap, .fill_we, .fill_target, .fill_bank, .fill_addr, .fill_data,
    .drain_re, .drain_bank, .drain_addr, .drain_data,
    .start, .n_groups, .n_iters, .busy, .done,
    .st_step1, .st_dec, .st_cmp, .st_red, .st_wait_pp, .st_wait_ppi
  );

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_overlap_s1_s2 = 0, n_overlap_dec_s2 = 0, n_wait_pp = 0, n_wait_ppi = 0;
  int n_reduce = 0, n_cmp_cycles = 0, n_blocks = 0, n_multiword = 0, n_fill_while_busy = 0;
  int n_drain_while_busy = 0;
  logic st_cmp_q = 1'b0;
  always @(posedge clk) begin
    if (st_step1 && st_cmp) n_overlap_s1_s2++;
    if (st_dec && st_cmp)   n_overlap_dec_s2++;
    if (st_wait_pp)         n_wait_pp++;
    if (st_wait_ppi)        n_wait_ppi++;
    if (st_red)             n_reduce++;
    if (st_cmp)             n_cmp_cycles++;
    if (st_cmp && !st_cmp_q) n_blocks++;
    if (fill_we && busy)    n_fill_while_busy++;
    if (drain_re && busy)   n_drain_while_busy++;
    st_cmp_q <= st_cmp;
  end

  // ---------------- layer model ----------------
  int unsigned G, T, N, M;
  int   xv   [];          // input values
  int   cnt  [];          // unique weights per input (1..256)
  int   uw   [][];        // unique weights
  int   idx  [][];        // index of weight (n, m) in uw[n]
  longint expv [];        // expected outputs
  int   seen_bits [9];    // index widths used

  function automatic int wrap(longint v);
    longint m;
    m = v & ((64'sd1 <<< PSUM_W) - 1);
    if (m >= (64'sd1 <<< (PSUM_W - 1))) m -= (64'sd1 <<< PSUM_W);
    return int'(m);
  endfunction

  function automatic int ibits(int c);
    return int'(size_code_for(c)) + 1;
  endfunction

  // Random layer; `maxuw` bounds the unique weights per input.
  task automatic gen_random(int unsigned g, int unsigned t, int maxuw);
    G = g; T = t; N = G * PE_ROWS * BS_ROW; M = T * PE_COLS * BS_COL;
    xv = new[N]; cnt = new[N]; uw = new[N]; idx = new[N];
    for (int n = 0; n < N; n++) begin
      xv[n]  = int'($urandom_range(0, 255)) - 128;
      case ($urandom_range(0, 3))
        0: cnt[n] = int'($urandom_range(1, 4));
        1: cnt[n] = int'($urandom_range(1, maxuw));
        default: cnt[n] = int'($urandom_range(1, (maxuw < 64) ? maxuw : 64));
      endcase
      // the first eight inputs cover every index width from 1 to 8 bits
      if (n < 8) cnt[n] = (n == 0) ? 1 : (1 << n) + 1 + int'($urandom_range(0, (1 << n) - 1));
      if (cnt[n] > 256) cnt[n] = 256;
      uw[n] = new[cnt[n]];
      for (int j = 0; j < cnt[n]; j++) uw[n][j] = int'($urandom_range(0, 255)) - 128;
      idx[n] = new[M];
      for (int m = 0; m < M; m++) idx[n][m] = int'($urandom_range(0, cnt[n] - 1));
    end
  endtask

  // A layer whose unique-weight counts are spread uniformly around `avg`
  // (from avg/2 to 3*avg/2), so that their mean is close to avg.
  task automatic gen_avg(int unsigned g, int unsigned t, int avg);
    G = g; T = t; N = G * PE_ROWS * BS_ROW; M = T * PE_COLS * BS_COL;
    xv = new[N]; cnt = new[N]; uw = new[N]; idx = new[N];
    for (int n = 0; n < N; n++) begin
      xv[n]  = int'($urandom_range(0, 255)) - 128;
      cnt[n] = int'($urandom_range((avg + 1) / 2, (3 * avg) / 2));
      uw[n] = new[cnt[n]];
      for (int j = 0; j < cnt[n]; j++) uw[n][j] = int'($urandom_range(0, 255)) - 128;
      idx[n] = new[M];
      for (int m = 0; m < M; m++) idx[n][m] = int'($urandom_range(0, cnt[n] - 1));
    end
  endtask

  // The 4-input, 8-output example layer of the paper's worked figures, after
  // partial product approximation (two unique weights per input, 1-bit indexes).
  task automatic gen_example();
    int ids [4][8] = '{'{0,1,0,0,1,1,1,0}, '{0,0,0,0,0,0,0,0},
                       '{1,1,1,0,0,1,1,1}, '{0,0,0,0,0,0,1,0}};
    G = 1; T = 2; N = 4; M = 8;
    xv = new[N]; cnt = new[N]; uw = new[N]; idx = new[N];
    xv = '{1, 4, 5, 7};
    cnt = '{2, 1, 2, 2};
    uw[0] = '{2, 6}; uw[1] = '{8}; uw[2] = '{2, 5}; uw[3] = '{3, 9};
    for (int n = 0; n < N; n++) begin
      idx[n] = new[M];
      for (int m = 0; m < M; m++) idx[n][m] = ids[n][m];
    end
  endtask

  task automatic compute_expected();
    expv = new[M];
    for (int m = 0; m < M; m++) begin
      longint s = 0;
      for (int n = 0; n < N; n++) s += longint'(xv[n]) * longint'(uw[n][idx[n][m]]);
      expv[m] = wrap(s);
    end
  endtask

  // ---------------- fill port ----------------
  task automatic fill(fill_target_e tgt, int bank, int addr, logic [FD_W-1:0] data);
    fill_we <= 1'b1; fill_target <= tgt; fill_bank <= FB_W'(bank);
    fill_addr <= 32'(addr); fill_data <= data;
    @(posedge clk);
  endtask

  task automatic load_layer();
    // inputs and unique weights, one bank per PE row
    for (int r = 0; r < PE_ROWS; r++) begin
      int wp = 0;
      for (int g = 0; g < G; g++)
        for (int i = 0; i < BS_ROW; i++) begin
          int n = g * PE_ROWS * BS_ROW + r * BS_ROW + i;
          fill(FILL_INPUT, r, g * BS_ROW + i, FD_W'({8'(cnt[n] - 1), 8'(xv[n])}));
          for (int w = 0; w * PE_COLS < cnt[n]; w++) begin
            logic [FD_W-1:0] d = '0;
            for (int l = 0; l < PE_COLS; l++)
              if (w * PE_COLS + l < cnt[n]) d[l*Q_W +: Q_W] = 8'(uw[n][w * PE_COLS + l]);
            if (cnt[n] > PE_COLS) n_multiword++;
            fill(FILL_UW, r, wp, d);
            wp++;
          end
        end
    end
    // index blocks, one bank per PE
    for (int r = 0; r < PE_ROWS; r++)
      for (int c = 0; c < PE_COLS; c++) begin
        int ap = 0;
        for (int g = 0; g < G; g++)
          for (int t = 0; t < T; t++) begin
            bit hdr [$];
            bit body [$];
            for (int i = 0; i < BS_ROW; i++) begin
              int n = g * PE_ROWS * BS_ROW + r * BS_ROW + i;
              int code = ibits(cnt[n]) - 1;
              for (int b = 0; b < SIZE_W; b++) hdr.push_back(bit'((code >> b) & 1));
              seen_bits[code + 1]++;
              for (int k = 0; k < BS_COL; k++) begin
                int m = t * PE_COLS * BS_COL + c * BS_COL + k;
                for (int b = 0; b < code + 1; b++) body.push_back(bit'((idx[n][m] >> b) & 1));
              end
            end
            while (hdr.size() % CHUNK_W != 0) hdr.push_back(1'b0);
            while (body.size() % CHUNK_W != 0) body.push_back(1'b0);
            for (int ch = 0; ch < hdr.size() / CHUNK_W; ch++) begin
              logic [FD_W-1:0] d = '0;
              for (int b = 0; b < CHUNK_W; b++) d[b] = hdr[ch * CHUNK_W + b];
              fill(FILL_INDEX, r * PE_COLS + c, ap, d);
              ap++;
            end
            for (int ch = 0; ch < body.size() / CHUNK_W; ch++) begin
              logic [FD_W-1:0] d = '0;
              for (int b = 0; b < CHUNK_W; b++) d[b] = body[ch * CHUNK_W + b];
              fill(FILL_INDEX, r * PE_COLS + c, ap, d);
              ap++;
            end
          end
      end
    fill_we <= 1'b0;
  endtask

  task automatic pulse_swap();
    swap <= 1'b1; @(posedge clk); swap <= 1'b0;
  endtask

  task automatic run_layer();
    n_groups <= IN_AW'(G); n_iters <= IT_W'(T);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
  endtask

  task automatic wait_done();
    do @(posedge clk); while (!done);
  endtask

  // Read every output through the drain port and compare.
  task automatic drain_check(longint ex [], string what);
    int bad = 0;
    for (int m = 0; m < ex.size(); m++) begin
      int t = m / (PE_COLS * BS_COL);
      int c = (m / BS_COL) % PE_COLS;
      int k = m % BS_COL;
      drain_re <= 1'b1; drain_bank <= DB_W'(c); drain_addr <= OUT_AW'(t * BS_COL + k);
      @(posedge clk);
      drain_re <= 1'b0;
      @(posedge clk);
      #1;
      checks++;
      if (longint'(drain_data) != ex[m]) begin
        failures++;
        if (bad++ < 8) $display("%s: output %0d = %0d, expected %0d", what, m, drain_data, ex[m]);
      end
    end
  endtask

  function automatic void need(int count, string what);
    checks++;
    if (count == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else $display("  %-40s %0d", what, count);
  endfunction


  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  task automatic wait_layers(int k);
    while (n_done < k) @(posedge clk);
  endtask

  task automatic check_cycles(int cmp0, int blk0, int nblk, string what);
    checks++;
    if (n_blocks - blk0 != nblk || n_cmp_cycles - cmp0 != nblk * BS_ROW * BS_COL) begin
      failures++;
      $display("%s: %0d blocks in %0d step-2 cycles, expected %0d blocks in %0d", what,
               n_blocks - blk0, n_cmp_cycles - cmp0, nblk, nblk * BS_ROW * BS_COL);
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    int c0, b0, t0, lay;
    string nm [5] = '{"DS2", "GNMT", "Transformer", "Kaldi", "PTBLM"};
    int    av [5] = '{38, 29, 49, 59, 43};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int w = 0; w < 5; w++) begin
      // 4 input groups x 1 output iteration: a 1024-input, 256-output slice
      gen_avg(4, 1, av[w]);
      compute_expected();
      load_layer();
      pulse_swap();
      c0 = n_cmp_cycles; b0 = n_blocks; t0 = cyc;
      run_layer();
      wait_layers(w + 1);
      lay = cyc - t0;
      check_cycles(c0, b0, 4, nm[w]);
      // step 2 is the bottleneck: 4 blocks of 257 cycles, the reduction of
      // BS_COL entries, and the first group's step 1 and first decode
      checks++;
      if (lay > 4 * (BS_ROW * BS_COL + 1) + BS_COL + 400) begin
        failures++;
        $display("%s: layer took %0d cycles", nm[w], lay);
      end
      $display("%-12s avg UW/input %0d: 1024 x 256 layer in %0d cycles (%0d MACs, %0d multiplications)",
               nm[w], av[w], lay, N * M, n_mults());
      pulse_swap();
      drain_check(expv, nm[w]);
    end
    $display("mechanisms:");
    need(n_overlap_s1_s2,  "step 1 overlapped with step 2 (cycles)");
    need(n_overlap_dec_s2, "decode overlapped with step 2 (cycles)");
    need(n_reduce,         "output reduction (cycles)");
    need(n_multiword,      "inputs with more UWs than PE columns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int n_mults();
    int s = 0;
    for (int n = 0; n < N; n++) s += cnt[n];
    return s;
  endfunction

endmodule
