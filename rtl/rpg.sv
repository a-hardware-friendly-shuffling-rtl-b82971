// rpg: random permutation generator. From a 32-bit seed supplied by an
// external true random number generator it builds a uniformly shuffled-looking
// permutation of the 64 addresses 00..3f and then serves it, one address per
// enb, in an endless loop (enb rotates the FIFO).
//
// Generation follows the paper's modified Fisher-Yates shuffle:
//   1. initialization: the LFSR fills the FIFO with 64 random 6-bit indexes
//      while REG takes the designed intermediate permutation;
//   2. shuffling_12: 12 elements are drawn from REG[00..28] (Eq. 10), each
//      hole being refilled from REG[rest] (rest = 63, 62, ...);
//   3. shuffling_52: the other 52 are drawn from REG[00..rest] (Eq. 11);
//   4. cyclic shift_6: the FIFO is rotated by six entries.
// Each drawn element replaces the consumed random index in the FIFO, so the
// same 64 x 6 storage holds first the indexes and then the permutation.
// The two-stage draw and the final rotation are how the paper restricts the
// first and last six entries of the result, whose read and write addresses
// overlap in the core's pipeline.
//
// Interface: pulse rst_l (with seed valid) for at least one cycle; finish
// rises about 520 cycles later and stays high; from then on addr is the next
// address and each cycle with enb high advances it. enb must stay low while
// finish is low. Blocks (a) to (e) of the paper's figure are the submodules
// rpg_reg, rpg_fifo, rpg_idx_adjust, rpg_lfsr and rpg_ctrl.
module rpg
  import shuffle_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [LFSR_W-1:0] seed,
  input  logic              rst_l,
  input  logic              enb,
  output perm_t             addr,
  output logic              finish
);

  logic      ena, reg_cap, reg_we, cnt_dec;
  logic      start, idx_valid;
  fifo_src_e sel_0;
  idx_sel_e  sel_1;
  perm_t     mux0_out, buf_idx, head, idx_p, rest;

  assign addr = head;

  rpg_reg u_reg (
    .clk  (clk),
    .init (start),
    .sel  (idx_p),
    .cap  (reg_cap),
    .we   (reg_we),
    .dout (mux0_out)
  );

  rpg_fifo u_fifo (
    .clk     (clk),
    .rst     (rst),
    .ena     (ena),
    .enb     (enb),
    .sel_0   (sel_0),
    .din_reg (mux0_out),
    .din_buf (buf_idx),
    .head    (head)
  );

  rpg_idx_adjust u_adj (
    .clk   (clk),
    .rst   (rst),
    .load  (start),
    .dec   (cnt_dec),
    .sel_1 (sel_1),
    .idx   (head),
    .idx_p (idx_p),
    .rest  (rest)
  );

  rpg_lfsr u_lfsr (
    .clk       (clk),
    .rst       (rst),
    .seed      (seed),
    .rst_l     (rst_l),
    .finish    (finish),
    .start     (start),
    .idx       (buf_idx),
    .idx_valid (idx_valid)
  );

  rpg_ctrl u_ctrl (
    .clk       (clk),
    .rst       (rst),
    .start     (start),
    .idx_valid (idx_valid),
    .rest      (rest),
    .ena       (ena),
    .sel_0     (sel_0),
    .sel_1     (sel_1),
    .finish    (finish),
    .reg_cap   (reg_cap),
    .reg_we    (reg_we),
    .cnt_dec   (cnt_dec)
  );

  // The address controller may only rotate a finished permutation.
  a_enb_after_finish: assert property (@(posedge clk) disable iff (rst) enb |-> finish);

endmodule
