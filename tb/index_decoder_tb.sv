// index_decoder_tb: self-checking test of the per-PE index decompressor.
//
// Builds random blocks (random index width per block row, 1..8 bits, random
// indexes), packs each as header + LSB-first body in 32-bit chunks, serves
// the decoder's chunk requests from a model SRAM with one cycle of latency,
// and compares every written (address, index) with the packed values. Also
// checks that the decoder asks for exactly the chunks of the block, writes
// every index once and pulses done once per block.
module index_decoder_tb;
  import crew_pkg::*;
  localparam int unsigned BS_ROW = 16, BS_COL = 16, CHUNK_W = 32;
  localparam int unsigned NIDX = BS_ROW * BS_COL;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done, chunk_req, chunk_valid = 1'b0, wr_en;
  logic [CHUNK_W-1:0] chunk_data = '0;
  logic [$clog2(NIDX)-1:0] wr_addr;
  idx_t wr_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  index_decoder #(.BS_ROW(BS_ROW), .BS_COL(BS_COL), .CHUNK_W(CHUNK_W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [CHUNK_W-1:0] stream [$];
  int rp = 0;
  int expect_idx [NIDX];
  int got_idx [NIDX];
  int n_writes = 0, n_done = 0;

  // model SRAM: answers a request one cycle later
  always @(posedge clk) begin
    chunk_valid <= chunk_req;
    if (chunk_req) begin
      if (rp < stream.size()) chunk_data <= stream[rp];
      else chunk_data <= '0;
      rp++;
    end
    if (wr_en) begin
      got_idx[wr_addr] = int'(wr_data);
      n_writes++;
    end
    if (done) n_done++;
  end

  task automatic make_block(int maxcode);
    bit bits [$];
    int code [BS_ROW];
    stream.delete(); rp = 0;
    for (int r = 0; r < BS_ROW; r++) begin
      code[r] = int'($urandom_range(0, maxcode));
      for (int b = 0; b < 3; b++) bits.push_back(bit'((code[r] >> b) & 1));
    end
    while (bits.size() % CHUNK_W) bits.push_back(1'b0);
    for (int r = 0; r < BS_ROW; r++)
      for (int k = 0; k < BS_COL; k++) begin
        int v = int'($urandom_range(0, (1 << (code[r] + 1)) - 1));
        expect_idx[r * BS_COL + k] = v;
        for (int b = 0; b <= code[r]; b++) bits.push_back(bit'((v >> b) & 1));
      end
    while (bits.size() % CHUNK_W) bits.push_back(1'b1);   // padding must be ignored
    for (int c = 0; c < bits.size() / CHUNK_W; c++) begin
      logic [CHUNK_W-1:0] w;
      for (int b = 0; b < CHUNK_W; b++) w[b] = bits[c * CHUNK_W + b];
      stream.push_back(w);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int blk = 0; blk < 12; blk++) begin
      int t0;
      make_block(blk < 2 ? blk * 7 : 7);   // first: all 1-bit, second: all 8-bit
      for (int i = 0; i < NIDX; i++) got_idx[i] = -1;
      n_writes = 0; n_done = 0;
      @(posedge clk);
      start <= 1'b1; @(posedge clk); start <= 1'b0;
      t0 = 0;
      while (!done && t0 < 5000) begin @(posedge clk); t0++; end
      @(posedge clk);
      checks++;
      if (n_done != 1 || n_writes != NIDX) begin
        failures++;
        $display("block %0d: %0d done pulses, %0d writes", blk, n_done, n_writes);
      end
      checks++;
      if (rp != stream.size()) begin
        failures++;
        $display("block %0d: %0d chunks requested, block has %0d", blk, rp, stream.size());
      end
      for (int i = 0; i < NIDX; i++) begin
        checks++;
        if (got_idx[i] != expect_idx[i]) begin
          failures++;
          if (failures < 10) $display("block %0d index %0d: got %0d expected %0d", blk, i, got_idx[i], expect_idx[i]);
        end
      end
      // 1-bit and 8-bit indexes both decode at one index per cycle
      if (blk < 2) begin
        checks++;
        if (t0 > NIDX + 8) begin
          failures++;
          $display("block %0d took %0d cycles", blk, t0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
