// global_buffer_tb: self-checking test of one double-buffered global SRAM bank.
//
// Fills the memory-side half with back-to-back writes while the array side
// reads and writes the other half, swaps, and checks that each side now
// sees what the other one wrote, with the one-cycle read latency.
module global_buffer_tb;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW    = $clog2(DEPTH / 2);

  logic clk = 1'b0, rst_n = 1'b0, swap = 1'b0;
  logic a_we = 1'b0, a_re = 1'b0, b_we = 1'b0, b_re = 1'b0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [WIDTH-1:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  global_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] pat(int side, int round, int a);
    return WIDTH'(side * 16'h4000 + round * 16'h1000 + a * 7 + 3);
  endfunction

  task automatic check(logic [WIDTH-1:0] got, logic [WIDTH-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int round = 0; round < 3; round++) begin
      // both sides write their halves at the same time, back to back
      for (int a = 0; a < DEPTH / 2; a++) begin
        a_we <= 1'b1; a_addr <= AW'(a); a_wdata <= pat(0, round, a);
        b_we <= 1'b1; b_addr <= AW'(a); b_wdata <= pat(1, round, a);
        @(posedge clk);
      end
      a_we <= 1'b0; b_we <= 1'b0;
      // each side reads back its own half (1-cycle latency)
      for (int a = 0; a < DEPTH / 2; a++) begin
        a_re <= 1'b1; a_addr <= AW'(a); b_re <= 1'b1; b_addr <= AW'(a);
        @(posedge clk);
        a_re <= 1'b0; b_re <= 1'b0;
        #1;
        check(a_rdata, pat(0, round, a), "memory side before swap");
        check(b_rdata, pat(1, round, a), "array side before swap");
      end
      // swap: each side now sees the other's data
      swap <= 1'b1; @(posedge clk); swap <= 1'b0;
      for (int a = 0; a < DEPTH / 2; a++) begin
        a_re <= 1'b1; a_addr <= AW'(a); b_re <= 1'b1; b_addr <= AW'(a);
        @(posedge clk);
        a_re <= 1'b0; b_re <= 1'b0;
        #1;
        check(a_rdata, pat(1, round, a), "memory side after swap");
        check(b_rdata, pat(0, round, a), "array side after swap");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
