// rpg_ctrl: part (e) of the random permutation generator, the controller that
// runs the four steps of the processing schedule.
//
//   IDLE  : after reset, waits for start (a new seed has been loaded).
//   FILL  : initialization. REG is loaded with the designed permutation (by
//           the start pulse) and each 6-bit index from the LFSR buffer is pushed into
//           the FIFO (sel_0 = BUF, ena on idx_valid) until it holds 64.
//   SEL   : first cycle of a Fisher-Yates step. idx' = idx_0 while rest >= 52
//           (the 12 steps of shuffling_12), idx_1 afterwards (shuffling_52).
//           REG[idx'] is pushed into the FIFO as the random index is popped
//           (sel_0 = REG, ena), and idx' is captured as the write target.
//   WR    : second cycle. idx' = rest, REG[idx] <= REG[rest], rest - 1.
//           After the step with rest = 0 (64 steps) go to SHIFT.
//   SHIFT : cyclic shift_6, six FIFO shifts with its own output fed back.
//   DONE  : finish = 1, the permutation is at the FIFO head; sel_0 stays on
//           the loop input so that the external enb rotates the FIFO.
// A start pulse restarts the schedule from any state. With a seed loaded at
// cycle 0 the permutation is ready after about 64*6 + 64*2 + 6 = 518 cycles.
// Following the paper: the step order, the 12/52 split, the shift by 6 and
// the outputs ena, sel_0, sel_1, finish. This design's own choices: the state
// encoding, the two cycles per Fisher-Yates step, and the REG and counter
// strobes (reg_cap, reg_we, cnt_dec), which the paper's figure does not name.
// The start pulse itself loads REG and the rest counter (wired in rpg).
module rpg_ctrl
  import shuffle_pkg::*;
#(
  parameter int unsigned N  = PERM_N,
  parameter int unsigned W  = PERM_W,
  parameter int unsigned S1 = STAGE1_N,
  parameter int unsigned SH = SHIFT_N
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  input  logic         idx_valid,
  input  logic [W-1:0] rest,
  output logic         ena,
  output fifo_src_e    sel_0,
  output idx_sel_e     sel_1,
  output logic         finish,
  output logic         reg_cap,
  output logic         reg_we,
  output logic         cnt_dec
);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_SEL, S_WR, S_SHIFT, S_DONE} state_e;

  state_e       state;
  logic [W-1:0] cnt;
  logic         stage1;   // a shuffling_12 step is in progress

  assign stage1 = (rest >= W'(N - S1));

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      cnt   <= '0;
    end else if (start) begin
      state <= S_FILL;
      cnt   <= '0;
    end else begin
      unique case (state)
        S_FILL: if (idx_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == W'(N - 1)) state <= S_SEL;
        end
        S_SEL:  state <= S_WR;
        S_WR:   if (rest == '0) begin
          state <= S_SHIFT;
          cnt   <= '0;
        end else begin
          state <= S_SEL;
        end
        S_SHIFT: begin
          cnt <= cnt + 1'b1;
          if (cnt == W'(SH - 1)) state <= S_DONE;
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    ena      = 1'b0;
    sel_0    = FIN_LOOP;
    sel_1    = IDX_REST;
    reg_cap  = 1'b0;
    reg_we   = 1'b0;
    cnt_dec  = 1'b0;
    finish   = (state == S_DONE);
    if (!start) begin
      unique case (state)
        S_FILL: begin
          sel_0 = FIN_BUF;
          ena   = idx_valid;
        end
        S_SEL: begin
          sel_0   = FIN_REG;
          sel_1   = stage1 ? IDX_SEL0 : IDX_SEL1;
          ena     = 1'b1;
          reg_cap = 1'b1;
        end
        S_WR: begin
          sel_1   = IDX_REST;
          reg_we  = 1'b1;
          cnt_dec = 1'b1;
        end
        S_SHIFT: ena = 1'b1;
        default: ;
      endcase
    end
  end

endmodule
