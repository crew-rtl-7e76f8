// pp_row_engine_tb: self-checking test of the step-1 sequencer of a PE row.
//
// Model input and unique-weight banks answer reads one cycle later; a model
// of the row's PEs multiplies the broadcast input by each weight lane and
// returns the products one cycle later, as the PEs do. Every write to the
// shared partial product buffer is applied to a model buffer. After two
// input groups (written to halves 0 and 1) the model buffer must hold
// x[i] * w[i][j] for every unique weight j of every input i, lanes beyond
// an input's count must never be written, and the engine must be busy for
// exactly sum over inputs of (2 + ceil(count / PE_COLS)) + 2 cycles per group.
module pp_row_engine_tb;
  import crew_pkg::*;
  localparam int unsigned PE_COLS = 4, BS_ROW = 4, IN_AW = 6, UW_AW = 8, GRP_W = 4;
  localparam int unsigned OW = $clog2((BS_ROW / PE_COLS) * UW_MAX);
  localparam int unsigned BW = $clog2(PE_COLS);

  logic clk = 1'b0, rst_n = 1'b0, layer_start = 1'b0, start = 1'b0, half = 1'b0;
  logic [GRP_W-1:0] grp = '0;
  logic busy, done, in_re, uw_re, mul_valid, pp_we, pp_half;
  logic [IN_AW-1:0] in_addr;
  logic [2*Q_W-1:0] in_rdata = '0;
  logic [UW_AW-1:0] uw_addr;
  logic [PE_COLS*Q_W-1:0] uw_rdata = '0;
  q_t mul_x;
  q_t mul_w [PE_COLS];
  pp_t pp_in [PE_COLS];
  logic [BW-1:0] pp_bank;
  logic [OW-1:0] pp_off;
  logic [PE_COLS-1:0] pp_mask;
  pp_t pp_wdata [PE_COLS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pp_row_engine #(.PE_COLS(PE_COLS), .BS_ROW(BS_ROW), .IN_AW(IN_AW), .UW_AW(UW_AW),
                  .GRP_W(GRP_W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned NG = 2;
  int xv [NG*BS_ROW];
  int cnt [NG*BS_ROW];
  int uw [NG*BS_ROW][UW_MAX];
  logic [2*Q_W-1:0] inmem [64];
  logic [PE_COLS*Q_W-1:0] uwmem [256];
  int ppm [2][BS_ROW][UW_MAX];
  int busy_cycles = 0;

  // memories and model PEs
  always @(posedge clk) begin
    if (in_re) in_rdata <= inmem[in_addr];
    if (uw_re) uw_rdata <= uwmem[uw_addr];
    for (int l = 0; l < PE_COLS; l++)
      if (mul_valid) pp_in[l] <= pp_t'(int'(mul_x) * int'(mul_w[l]));
    if (pp_we)
      for (int l = 0; l < PE_COLS; l++)
        if (pp_mask[l]) ppm[pp_half][int'(pp_off) / UW_MAX * PE_COLS + int'(pp_bank)][int'(pp_off) % UW_MAX + l] = int'(pp_wdata[l]);
    if (busy) busy_cycles++;
  end

  initial begin
    int wp = 0;
    for (int l = 0; l < PE_COLS; l++) pp_in[l] = '0;
    for (int h = 0; h < 2; h++) for (int i = 0; i < BS_ROW; i++) for (int j = 0; j < UW_MAX; j++) ppm[h][i][j] = 99999;
    for (int n = 0; n < NG * BS_ROW; n++) begin
      xv[n] = int'($urandom_range(0, 255)) - 128;
      cnt[n] = (n == 0) ? 256 : (n == 1) ? 1 : int'($urandom_range(1, 40));
      inmem[n] = {8'(cnt[n] - 1), 8'(xv[n])};
      for (int j = 0; j < cnt[n]; j++) uw[n][j] = int'($urandom_range(0, 255)) - 128;
      for (int w = 0; w * PE_COLS < cnt[n]; w++) begin
        uwmem[wp] = '0;
        for (int l = 0; l < PE_COLS; l++)
          if (w * PE_COLS + l < cnt[n]) uwmem[wp][l*Q_W +: Q_W] = 8'(uw[n][w * PE_COLS + l]);
        wp++;
      end
    end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    layer_start <= 1'b1; @(posedge clk); layer_start <= 1'b0;
    for (int g = 0; g < NG; g++) begin
      automatic int b0 = busy_cycles, expc = 2;
      for (int i = 0; i < BS_ROW; i++) expc += 2 + (cnt[g * BS_ROW + i] + PE_COLS - 1) / PE_COLS;
      start <= 1'b1; grp <= GRP_W'(g); half <= 1'(g);
      @(posedge clk);
      start <= 1'b0;
      @(posedge done);
      @(posedge clk);
      checks++;
      if (busy_cycles - b0 != expc) begin
        failures++;
        $display("group %0d: busy %0d cycles, expected %0d", g, busy_cycles - b0, expc);
      end
    end
    for (int g = 0; g < NG; g++)
      for (int i = 0; i < BS_ROW; i++)
        for (int j = 0; j < UW_MAX; j++) begin
          automatic int n = g * BS_ROW + i;
          automatic int e = (j < cnt[n]) ? int'(pp_t'(xv[n] * uw[n][j])) : 99999;
          checks++;
          if (ppm[g][i][j] != e) begin
            failures++;
            if (failures < 10) $display("group %0d input %0d uw %0d: got %0d expected %0d", g, i, j, ppm[g][i][j], e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
