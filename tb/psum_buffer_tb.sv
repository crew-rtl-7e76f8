// psum_buffer_tb: self-checking test of a PE's partial sum buffer.
//
// Performs random read-modify-write accumulations through port A (as the PE
// does, one per cycle) and checks every entry through the reduction port R
// against a model, including wrap-around at the 24-bit width.
module psum_buffer_tb;
  localparam int unsigned ENTRIES = 256, W = 24, AW = $clog2(ENTRIES);

  logic clk = 1'b0, wr_en = 1'b0;
  logic [AW-1:0] wr_addr = '0, a_addr = '0, r_addr = '0;
  logic signed [W-1:0] wr_data = '0, a_data, r_data;
  int checks = 0, failures = 0;
  logic signed [W-1:0] model [ENTRIES];

  always #5 clk = ~clk;

  psum_buffer #(.ENTRIES(ENTRIES), .W(W)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    // clear
    for (int a = 0; a < ENTRIES; a++) begin
      wr_en <= 1'b1; wr_addr <= AW'(a); wr_data <= '0; model[a] = '0;
      @(posedge clk);
    end
    // accumulate: read through A, add, write back in the same cycle
    for (int i = 0; i < 8000; i++) begin
      automatic logic [AW-1:0] a = AW'($urandom);
      automatic logic signed [W-1:0] d = W'($signed(16'($urandom))) <<< (i % 9);
      a_addr = a;
      #1;
      wr_en <= 1'b1; wr_addr <= a; wr_data <= a_data + d;
      model[a] = model[a] + d;
      @(posedge clk);
    end
    wr_en <= 1'b0;
    @(posedge clk);
    for (int a = 0; a < ENTRIES; a++) begin
      r_addr = AW'(a);
      #1;
      checks++;
      if (r_data !== model[a]) begin
        failures++;
        if (failures < 10) $display("entry %0d: got %0d expected %0d", a, r_data, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
