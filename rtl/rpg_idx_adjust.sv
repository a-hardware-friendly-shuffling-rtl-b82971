// rpg_idx_adjust: part (c) of the random permutation generator. It turns the
// raw 6-bit random index idx (the FIFO head) into the REG index idx' and keeps
// the down-counter rest.
//
//   idx_0 = idx            if idx <= 0x28        (Eq. 10, shuffling_12)
//         = idx - 0x28     otherwise
//   idx_1 = idx            if idx <= rest        (Eq. 11, shuffling_52)
//         = idx & rest     otherwise
//   idx'  = MUX2(sel_1) of idx_0, idx_1, rest
//
// rest is the number of elements still to be selected minus one: load sets it
// to N-1 (63), dec decrements it by one per Fisher-Yates step. The two
// comparators, the subtractor, the AND gate, the counter and MUX2 are the ones
// the paper lists; idx' is combinational. The paper's processing schedule
// writes both conditions the other way round ("FIFO_out > 0x28 ? FIFO_out :
// FIFO_out - 0x28"); this design follows Eqs. (10) and (11) and the worked
// example in the text (rest = 0x02, idx = 0x05 gives 0x00), which keep idx'
// inside the range that is still unselected.
module rpg_idx_adjust
  import shuffle_pkg::*;
#(
  parameter int unsigned N     = PERM_N,
  parameter int unsigned W     = PERM_W,
  parameter int unsigned BOUND = STAGE1_MAX
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,    // rest <= N-1
  input  logic         dec,     // rest <= rest - 1
  input  idx_sel_e     sel_1,
  input  logic [W-1:0] idx,
  output logic [W-1:0] idx_p,   // idx'
  output logic [W-1:0] rest
);

  logic [W-1:0] idx_0, idx_1;

  // CNTR
  always_ff @(posedge clk) begin
    if (rst || load) rest <= W'(N - 1);
    else if (dec)    rest <= rest - 1'b1;
  end

  always_comb begin
    idx_0 = (idx > W'(BOUND)) ? idx - W'(BOUND) : idx;
    idx_1 = (idx > rest)      ? (idx & rest)    : idx;
    unique case (sel_1)
      IDX_SEL0: idx_p = idx_0;
      IDX_SEL1: idx_p = idx_1;
      default:  idx_p = rest;
    endcase
  end

endmodule
