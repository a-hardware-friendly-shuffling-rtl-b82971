// rpg_reg: part (a) of the random permutation generator, the register group
// REG with its read multiplexer MUX0 and its write demultiplexer DEMUX.
//
// REG holds N entries of W bits (64 x 6 in the paper). MUX0 continuously
// presents REG[sel] on dout, where sel is the adjusted index idx'. DEMUX feeds
// dout back into REG: with we high, dout is written into the entry whose
// index was captured on the last cycle with cap high. This realises one
// Fisher-Yates step in two cycles with a single read multiplexer:
//   cycle 1: sel = idx_0 / idx_1, cap = 1  -> dout = REG[idx] goes to the FIFO
//   cycle 2: sel = rest,          we  = 1  -> REG[idx] <= REG[rest]
// init loads the designed address permutation (shuffle_pkg::designed_perm)
// into REG in one cycle; it has priority over we.
// Following the paper: the 64-to-1 MUX0, the 1-to-64 DEMUX fed from MUX0 and
// both steered by idx'. This design's own choice: the one-cycle register that
// holds the DEMUX target index, needed because idx' is rest during the write.
module rpg_reg
  import shuffle_pkg::*;
#(
  parameter int unsigned N = PERM_N,
  parameter int unsigned W = PERM_W
) (
  input  logic         clk,
  input  logic         init,   // load the designed permutation
  input  logic [W-1:0] sel,    // idx': MUX0 select
  input  logic         cap,    // capture sel as the DEMUX target
  input  logic         we,     // write dout into REG[captured index]
  output logic [W-1:0] dout    // MUX0 output
);

  logic [W-1:0] regs [N];
  logic [W-1:0] wr_idx;

  assign dout = regs[sel];   // MUX0

  always_ff @(posedge clk) begin
    if (cap) wr_idx <= sel;
  end

  // DEMUX and REG
  always_ff @(posedge clk) begin
    if (init) begin
      for (int i = 0; i < N; i++) regs[i] <= W'(designed_perm(i));
    end else if (we) begin
      regs[wr_idx] <= dout;
    end
  end

endmodule
