// pp_row_engine: step-1 sequencer of one PE row (partial product generation).
//
// For input group `grp`, this row owns BS_ROW input neurons, stored at
// addresses grp * BS_ROW + i (i = 0..BS_ROW-1) of the row's input bank. Each
// input word holds {unique-weight count - 1 (8 bits), input value (8 bits)}.
// The unique weights of all inputs are stored one after another in the row's
// unique-weight bank, PE_COLS weights per word (lane l goes to PE column l),
// each input starting on a new word. A word pointer walks that bank for the
// whole layer and is restarted by `layer_start`.
//
// For every input the engine reads the input word, then one unique-weight
// word per cycle; the input is broadcast to all PEs of the row and weight
// lane l is sent to PE column l. One cycle later the PEs return the products,
// which the engine writes, lanes masked beyond the count, into the shared
// partial product buffer half `half`, bank i % PE_COLS, offset
// (i / PE_COLS) * 256 + word * PE_COLS. An input with n unique weights takes
// 2 + ceil(n / PE_COLS) cycles; `done` pulses when the group's last products
// are written.
// The paper fixes what happens (read input and count, read its unique weights,
// broadcast along the row, distribute weights over the PEs, store products);
// memory layout, word format and pipeline are this design's choices.
// The second pipeline tag copies the whole first one, so its input-value
// field is carried but unused (lint reports those 8 bits).
// The weight lanes and the returned products pass straight through to the
// PEs and to the shared buffer, so a synthesis report counts those outputs
// as wired to inputs.
// rst_n is the asynchronous reset and also disables the assertions
// (`disable iff`); lint reports that double use, which is intended.
module pp_row_engine
  import crew_pkg::*;
#(
  parameter int unsigned PE_COLS = 16,
  parameter int unsigned BS_ROW  = 16,
  parameter int unsigned IN_AW   = 15,
  parameter int unsigned UW_AW   = 13,
  parameter int unsigned GRP_W   = 12,
  localparam int unsigned OW     = $clog2((BS_ROW / PE_COLS) * UW_MAX),
  localparam int unsigned BW     = (PE_COLS > 1) ? $clog2(PE_COLS) : 1,
  localparam int unsigned IW     = $clog2(BS_ROW)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   layer_start,
  input  logic                   start,
  input  logic [GRP_W-1:0]       grp,
  input  logic                   half,
  output logic                   busy,
  output logic                   done,
  // input bank (synchronous read, 1 cycle)
  output logic                   in_re,
  output logic [IN_AW-1:0]       in_addr,
  input  logic [2*Q_W-1:0]       in_rdata,
  // unique-weight bank (synchronous read, 1 cycle)
  output logic                   uw_re,
  output logic [UW_AW-1:0]       uw_addr,
  input  logic [PE_COLS*Q_W-1:0] uw_rdata,
  // to / from the PEs of the row
  output logic                   mul_valid,
  output q_t                     mul_x,
  output q_t                     mul_w [PE_COLS],
  input  pp_t                    pp_in [PE_COLS],
  // shared partial product buffer write port
  output logic                   pp_we,
  output logic                   pp_half,
  output logic [BW-1:0]          pp_bank,
  output logic [OW-1:0]          pp_off,
  output logic [PE_COLS-1:0]     pp_mask,
  output pp_t                    pp_wdata [PE_COLS]
);
  typedef enum logic [1:0] {S_IDLE, S_RDIN, S_GOTIN, S_UW} state_e;
  state_e state;

  typedef struct packed {
    logic               v;
    logic [IW-1:0]      i;
    logic [7:0]         word;   // unique-weight word number of this input
    logic [PE_COLS-1:0] mask;
    q_t                 x;
  } tag_t;

  logic [IW-1:0]    i_cur;
  logic [GRP_W-1:0] grp_q;
  logic             half_q;
  q_t               x_cur;
  logic [8:0]       n_cur;      // unique weights of current input, 1..256
  logic [7:0]       word;       // current word within the input
  logic [UW_AW-1:0] uw_ptr;
  tag_t             t1, t2;     // t1: weight word arriving, t2: products arriving
  logic             last_input;

  assign last_input = (i_cur == IW'(BS_ROW - 1));

  // lane mask of word `w` for an input with `n` unique weights
  function automatic logic [PE_COLS-1:0] lane_mask(logic [7:0] w, logic [8:0] n);
    logic [PE_COLS-1:0] m;
    for (int l = 0; l < PE_COLS; l++)
      m[l] = (int'(w) * PE_COLS + l) < int'(n);
    return m;
  endfunction

  logic [7:0] n_words_m1;
  assign n_words_m1 = 8'((int'(n_cur) + PE_COLS - 1) / PE_COLS - 1);

  assign in_re   = (state == S_RDIN);
  assign in_addr = IN_AW'(grp_q) * IN_AW'(BS_ROW) + IN_AW'(i_cur);
  assign uw_re   = (state == S_UW);
  assign uw_addr = uw_ptr;
  assign busy    = (state != S_IDLE) || t1.v || t2.v;

  // weight word arrives: drive the multipliers
  assign mul_valid = t1.v;
  assign mul_x     = t1.x;
  always_comb
    for (int l = 0; l < PE_COLS; l++)
      mul_w[l] = q_t'(uw_rdata[l*Q_W +: Q_W]);

  // products arrive: write them
  assign pp_we    = t2.v;
  assign pp_half  = half_q;
  assign pp_bank  = BW'(int'(t2.i) % PE_COLS);
  assign pp_off   = OW'((int'(t2.i) / PE_COLS) * UW_MAX + int'(t2.word) * PE_COLS);
  assign pp_mask  = t2.mask;
  assign pp_wdata = pp_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; i_cur <= '0; grp_q <= '0; half_q <= 1'b0; x_cur <= '0;
      n_cur <= '0; word <= '0; uw_ptr <= '0; t1 <= '0; t2 <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      t2   <= t1;
      t1   <= '0;
      if (layer_start) uw_ptr <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RDIN; i_cur <= '0; grp_q <= grp; half_q <= half;
        end
        S_RDIN: state <= S_GOTIN;
        S_GOTIN: begin
          x_cur <= q_t'(in_rdata[Q_W-1:0]);
          n_cur <= 9'(in_rdata[2*Q_W-1:Q_W]) + 9'd1;
          word  <= '0;
          state <= S_UW;
        end
        S_UW: begin
          uw_ptr <= uw_ptr + 1'b1;
          t1 <= '{v: 1'b1, i: i_cur, word: word, mask: lane_mask(word, n_cur), x: x_cur};
          if (word == n_words_m1) begin
            if (last_input) state <= S_IDLE;
            else begin
              state <= S_RDIN;
              i_cur <= i_cur + 1'b1;
            end
          end else word <= word + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
      // the group is finished when its last products are written
      if (t2.v && t2.i == IW'(BS_ROW - 1) && state == S_IDLE && !t1.v) done <= 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("step-1 start while busy");
endmodule
