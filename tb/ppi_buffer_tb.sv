// ppi_buffer_tb: self-checking test of the double-buffered indirections buffer.
//
// Writes a different random block into each half, then reads every entry of
// both halves (combinational read) and compares; then rewrites one half while
// reading the other to show that the halves are independent.
module ppi_buffer_tb;
  import crew_pkg::*;
  localparam int unsigned BS_ROW = 16, BS_COL = 16, NIDX = BS_ROW * BS_COL;
  localparam int unsigned AW = $clog2(NIDX);

  logic clk = 1'b0, wr_en = 1'b0, wr_half = 1'b0, rd_half = 1'b0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  idx_t wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  idx_t model [2][NIDX];

  always #5 clk = ~clk;

  ppi_buffer #(.BS_ROW(BS_ROW), .BS_COL(BS_COL)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(int h);
    for (int a = 0; a < NIDX; a++) begin
      rd_half = 1'(h); rd_addr = AW'(a);
      #1;
      checks++;
      if (rd_data !== model[h][a]) begin
        failures++;
        if (failures < 10) $display("half %0d addr %0d: got %0d expected %0d", h, a, rd_data, model[h][a]);
      end
    end
  endtask

  initial begin
    @(posedge clk);
    for (int round = 0; round < 3; round++) begin
      automatic int h = round % 2;
      for (int a = 0; a < NIDX; a++) begin
        automatic idx_t v = idx_t'($urandom);
        if (round == 0) begin
          // first round fills both halves
          wr_en <= 1'b1; wr_half <= 1'b1; wr_addr <= AW'(a); wr_data <= ~v;
          model[1][a] = ~v;
          @(posedge clk);
        end
        wr_en <= 1'b1; wr_half <= 1'(h); wr_addr <= AW'(a); wr_data <= v;
        model[h][a] = v;
        @(posedge clk);
      end
      wr_en <= 1'b0;
      @(posedge clk);
      read_all(0);
      read_all(1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
