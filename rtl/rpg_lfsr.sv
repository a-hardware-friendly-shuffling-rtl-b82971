// rpg_lfsr: part (d) of the random permutation generator, a 32-bit LFSR and
// the buffer BUF that packs its output bits into 6-bit random indexes.
//
// While rst_l is high the LFSR is loaded with the seed from an external true
// random number generator. When rst_l falls, start pulses for one cycle and
// the LFSR steps once per cycle, shifting one bit into BUF; every sixth bit
// idx_valid pulses with the completed 6-bit index on idx (Fibonacci form, bit 0
// is the output). The LFSR stops while finish is high, so it is quiet once the
// permutation is ready.
// Following the paper: LFSR depth 32, 1-bit output, 6-bit index every six
// cycles, seed loaded when rst_l is 1, start to and finish from the
// controller. This design's own choices: the feedback polynomial
// x^32 + x^22 + x^2 + x + 1 (maximal length), replacing an all-zero seed by 1
// so the register can never lock up, and the rst input, which only clears the
// start/BUF bookkeeping.
module rpg_lfsr
  import shuffle_pkg::*;
#(
  parameter int unsigned LW = LFSR_W,
  parameter int unsigned W  = PERM_W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [LW-1:0] seed,
  input  logic          rst_l,      // load seed
  input  logic          finish,     // freeze the LFSR
  output logic          start,      // one-cycle pulse after seeding
  output logic [W-1:0]  idx,        // BUF output
  output logic          idx_valid   // a new index in idx
);

  logic [LW-1:0]        lfsr;
  logic                 rst_l_q;
  logic [$clog2(W)-1:0] nbits;
  logic                 fb;
  logic                 run;

  // taps 32, 22, 2, 1 (bit numbers 31, 21, 1, 0)
  assign fb  = lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0];
  assign run = !rst_l && !finish;

  always_ff @(posedge clk) begin
    if (rst_l) begin
      lfsr <= (seed == '0) ? LW'(1) : seed;
    end else if (run) begin
      lfsr <= {fb, lfsr[LW-1:1]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rst_l_q   <= 1'b0;
      start     <= 1'b0;
      nbits     <= '0;
      idx_valid <= 1'b0;
      idx       <= '0;
    end else begin
      rst_l_q   <= rst_l;
      start     <= rst_l_q && !rst_l;
      idx_valid <= 1'b0;
      if (rst_l) begin
        nbits <= '0;
      end else if (run) begin
        idx <= {idx[W-2:0], lfsr[0]};
        if (nbits == ($clog2(W))'(W - 1)) begin
          nbits     <= '0;
          idx_valid <= 1'b1;
        end else begin
          nbits <= nbits + 1'b1;
        end
      end
    end
  end

endmodule
