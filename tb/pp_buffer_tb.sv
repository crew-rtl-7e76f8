// pp_buffer_tb: self-checking test of a row's shared partial product buffer.
//
// Step-1 style writes: for every input neuron of a block and both halves,
// products are written PE_COLS lanes at a time with a lane mask. Step-2 style
// reads: every cycle each PE column c reads block row (r + c) mod BS_ROW at a
// random index, so all columns hit different banks; every read is compared
// with the model. Masked-off lanes must keep their old contents.
module pp_buffer_tb;
  import crew_pkg::*;
  localparam int unsigned PE_COLS = 4, BS_ROW = 8;
  localparam int unsigned NPB = BS_ROW / PE_COLS, DEPTH = NPB * UW_MAX;
  localparam int unsigned OW = $clog2(DEPTH), BW = $clog2(PE_COLS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, wr_half = 1'b0, rd_en = 1'b0, rd_half = 1'b0;
  logic [BW-1:0] wr_bank = '0;
  logic [OW-1:0] wr_off = '0;
  logic [PE_COLS-1:0] wr_mask = '0;
  pp_t wr_data [PE_COLS];
  logic [BW-1:0] rd_bank [PE_COLS];
  logic [OW-1:0] rd_off [PE_COLS];
  pp_t rd_data [PE_COLS];
  int checks = 0, failures = 0;
  pp_t model [2][BS_ROW][UW_MAX];

  always #5 clk = ~clk;

  pp_buffer #(.PE_COLS(PE_COLS), .BS_ROW(BS_ROW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < PE_COLS; c++) begin wr_data[c] = '0; rd_bank[c] = '0; rd_off[c] = '0; end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int h = 0; h < 2; h++)
        for (int i = 0; i < BS_ROW; i++)
          for (int w = 0; w < UW_MAX / PE_COLS; w++) begin
            wr_en <= 1'b1; wr_half <= 1'(h); wr_bank <= BW'(i % PE_COLS);
            wr_off <= OW'((i / PE_COLS) * UW_MAX + w * PE_COLS);
            for (int l = 0; l < PE_COLS; l++) begin
              automatic pp_t v = pp_t'($urandom);
              automatic logic m = (pass == 0) || ($urandom_range(0, 1) == 1);
              wr_mask[l] <= m;
              wr_data[l] <= v;
              if (m) model[h][i][w * PE_COLS + l] = v;
            end
            @(posedge clk);
          end
      wr_en <= 1'b0;
      // conflict-free reads, as the PEs of a row issue them
      for (int h = 0; h < 2; h++)
        for (int s = 0; s < 600; s++) begin
          automatic int r = s % BS_ROW;
          int ii [PE_COLS];
          int jj [PE_COLS];
          for (int c = 0; c < PE_COLS; c++) begin
            ii[c] = (r + c) % BS_ROW;
            jj[c] = int'($urandom_range(0, UW_MAX - 1));
            rd_bank[c] = BW'(ii[c] % PE_COLS);
            rd_off[c]  = OW'((ii[c] / PE_COLS) * UW_MAX + jj[c]);
          end
          rd_en = 1'b1; rd_half = 1'(h);
          #1;
          for (int c = 0; c < PE_COLS; c++) begin
            checks++;
            if (rd_data[c] !== model[h][ii[c]][jj[c]]) begin
              failures++;
              if (failures < 10) $display("half %0d input %0d uw %0d: got %0d expected %0d",
                                          h, ii[c], jj[c], rd_data[c], model[h][ii[c]][jj[c]]);
            end
          end
          @(posedge clk);
        end
      rd_en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
