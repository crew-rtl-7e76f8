// pe_tb: self-checking test of one processing element.
//
// The PE sits in column 1 of a 2-column row with 4 x 4 blocks. The test
//  * drives the multiplier with random signed operands and checks each
//    16-bit product one cycle later;
//  * serves the PE's index fetches from a model index bank (1-cycle latency)
//    holding three compressed blocks, and its partial product reads from a
//    model shared buffer (combinational);
//  * decodes block 0, then runs step 2 on it while block 1 is decoded into
//    the other half, then block 2 on top of block 0's outputs (accumulate),
//    checking the 16-cycle block time and that this column starts on block
//    row 1 (staggered bank);
//  * reads the partial sums back through the reduction port, adding a random
//    value from "above", and compares with sums computed here.
module pe_tb;
  import crew_pkg::*;
  localparam int unsigned COL = 1, PE_COLS = 2, BS_ROW = 4, BS_COL = 4;
  localparam int unsigned PSUM_ENTRIES = 16, PSUM_W = 24, CHUNK_W = 32, IDX_AW = 6;
  localparam int unsigned NIDX = BS_ROW * BS_COL;
  localparam int unsigned PA_W = $clog2(PSUM_ENTRIES);
  localparam int unsigned OW = $clog2((BS_ROW / PE_COLS) * UW_MAX);

  logic clk = 1'b0, rst_n = 1'b0, layer_start = 1'b0;
  logic mul_valid = 1'b0, pp_valid;
  q_t mul_x = '0, mul_w = '0;
  pp_t pp_out;
  logic dec_start = 1'b0, dec_half = 1'b0, dec_done, idx_re;
  logic [IDX_AW-1:0] idx_addr;
  logic [CHUNK_W-1:0] idx_rdata = '0;
  logic cmp_start = 1'b0, cmp_half = 1'b0, cmp_first = 1'b0, cmp_busy, cmp_done;
  logic [PA_W-1:0] cmp_base = '0, red_addr = '0;
  logic [0:0] pp_rd_bank;
  logic [OW-1:0] pp_rd_off;
  pp_t pp_rd_data;
  logic signed [PSUM_W-1:0] red_in = '0, red_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pe #(.COL(COL), .PE_COLS(PE_COLS), .BS_ROW(BS_ROW), .BS_COL(BS_COL),
       .PSUM_ENTRIES(PSUM_ENTRIES), .PSUM_W(PSUM_W), .CHUNK_W(CHUNK_W), .IDX_AW(IDX_AW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model shared partial product buffer of the row (one half is enough here)
  pp_t ppm [BS_ROW][UW_MAX];
  always_comb pp_rd_data = ppm[int'(pp_rd_off) / UW_MAX * PE_COLS + int'(pp_rd_bank)][int'(pp_rd_off) % UW_MAX];

  // model index bank
  logic [CHUNK_W-1:0] ibank [64];
  always @(posedge clk) if (idx_re) idx_rdata <= ibank[idx_addr];

  int blk_idx [3][BS_ROW][BS_COL];
  longint psum_exp [PSUM_ENTRIES];

  task automatic build_blocks();
    bit bits [$];
    for (int b = 0; b < 3; b++) begin
      int code [BS_ROW];
      bit body [$];
      for (int r = 0; r < BS_ROW; r++) begin
        code[r] = (b * 3 + r) % 8;
        for (int q = 0; q < 3; q++) bits.push_back(bit'((code[r] >> q) & 1));
      end
      while (bits.size() % CHUNK_W) bits.push_back(1'b0);
      for (int r = 0; r < BS_ROW; r++)
        for (int k = 0; k < BS_COL; k++) begin
          blk_idx[b][r][k] = int'($urandom_range(0, (1 << (code[r] + 1)) - 1));
          for (int q = 0; q <= code[r]; q++) bits.push_back(bit'((blk_idx[b][r][k] >> q) & 1));
        end
      while (bits.size() % CHUNK_W) bits.push_back(1'b0);
    end
    for (int c = 0; c < 64; c++) begin
      ibank[c] = '0;
      if ((c + 1) * CHUNK_W <= bits.size())
        for (int q = 0; q < CHUNK_W; q++) ibank[c][q] = bits[c * CHUNK_W + q];
    end
  endtask

  // staggered start: this column first touches block row COL, hence bank COL % PE_COLS
  int first_bank = -1;
  logic busy_q = 1'b0;
  int busy_cycles = 0;
  always @(posedge clk) begin
    if (cmp_busy) busy_cycles++;
    if (cmp_busy && !busy_q) first_bank = int'(pp_rd_bank);
    busy_q <= cmp_busy;
  end

  task automatic run_block(int b, int half, int base, bit first);
    int n0 = busy_cycles, n;
    cmp_start <= 1'b1; cmp_half <= 1'(half); cmp_base <= PA_W'(base); cmp_first <= first;
    @(posedge clk);
    cmp_start <= 1'b0;
    @(posedge cmp_done);
    repeat (3) @(posedge clk);
    n = busy_cycles - n0;
    checks++;
    if (n != NIDX) begin failures++; $display("block %0d took %0d cycles, expected %0d", b, n, NIDX); end
    checks++;
    if (first_bank != COL % PE_COLS) begin failures++; $display("first bank %0d", first_bank); end
    for (int k = 0; k < BS_COL; k++) begin
      longint s = first ? 0 : psum_exp[base + k];
      for (int r = 0; r < BS_ROW; r++) s += ppm[r][blk_idx[b][r][k]];
      psum_exp[base + k] = s;
    end
  endtask

  task automatic decode(int half);
    dec_start <= 1'b1; dec_half <= 1'(half);
    @(posedge clk);
    dec_start <= 1'b0;
  endtask

  initial begin
    for (int r = 0; r < BS_ROW; r++) for (int j = 0; j < UW_MAX; j++) ppm[r][j] = pp_t'($urandom);
    build_blocks();
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // multiplier
    for (int i = 0; i < 200; i++) begin
      automatic q_t x = q_t'($urandom), w = q_t'($urandom);
      mul_valid <= 1'b1; mul_x <= x; mul_w <= w;
      @(posedge clk);
      mul_valid <= 1'b0;
      #1;
      checks++;
      if (!pp_valid || pp_out !== pp_t'(int'(x) * int'(w))) begin
        failures++;
        $display("product %0d * %0d = %0d", x, w, pp_out);
      end
      @(posedge clk);
    end

    layer_start <= 1'b1; @(posedge clk); layer_start <= 1'b0;
    decode(0);
    @(posedge dec_done);
    @(posedge clk);
    fork
      run_block(0, 0, 0, 1'b1);
      begin decode(1); @(posedge dec_done); end
    join
    @(posedge clk);
    run_block(1, 1, BS_COL, 1'b1);
    decode(0);
    @(posedge dec_done);
    @(posedge clk);
    run_block(2, 0, 0, 1'b0);

    // reduction port
    for (int e = 0; e < 2 * BS_COL; e++) begin
      automatic logic signed [PSUM_W-1:0] above = PSUM_W'($signed(16'($urandom)));
      red_addr = PA_W'(e); red_in = above;
      #1;
      checks++;
      if (red_out !== PSUM_W'(psum_exp[e] + longint'(above))) begin
        failures++;
        $display("psum %0d: got %0d expected %0d", e, red_out - above, psum_exp[e]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
