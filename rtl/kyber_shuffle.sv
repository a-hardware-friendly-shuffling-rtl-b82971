// kyber_shuffle: the shuffling countermeasure for a Kyber decryption core,
// the random permutation generator (rpg) joined to the address controller
// (addr_ctrl).
//
// The core's controller keeps producing its ordinary sequential addresses and
// states which operation it runs (state: off, PWM, INTT, subtraction) and, for
// PWM, which polynomial row (0..3). While state is not OP_OFF, the six RAM/ROM
// addresses leaving this block are replaced by addresses drawn from a random
// permutation of the 64 word positions, so the order in which the secret-
// dependent sub-operations run changes from seed to seed; with state OP_OFF
// the core's addresses pass through unchanged.
//
// Use: load a fresh 32-bit TRNG seed with rst_l (one cycle or more). About 520
// cycles later rpg_finish rises; only then may the core start a shuffled
// operation. A new seed may be loaded between operations to draw a new
// permutation (rpg_finish drops until it is ready). Generation runs alongside
// the core's other work (for instance the NTT of u, which the paper does not
// shuffle). The Kyber core, its RAMs and ROM and the TRNG are outside this
// block; their address and seed signals are this block's ports. The six
// addresses travel as one mem_addrs_t bundle in each direction (core_addr in,
// mem_addr out).
module kyber_shuffle
  import shuffle_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [LFSR_W-1:0] seed,
  input  logic              rst_l,
  output logic              rpg_finish,
  input  shuf_op_e          state,
  input  logic [1:0]        row,
  input  mem_addrs_t        core_addr,  // the core's six addresses
  output mem_addrs_t        mem_addr    // the six addresses to RAMs/ROM
);

  logic  enb;
  perm_t perm_addr;

  rpg u_rpg (
    .clk    (clk),
    .rst    (rst),
    .seed   (seed),
    .rst_l  (rst_l),
    .enb    (enb),
    .addr   (perm_addr),
    .finish (rpg_finish)
  );

  addr_ctrl u_addr (
    .clk          (clk),
    .rst          (rst),
    .rpg_finish   (rpg_finish),
    .rpg_addr     (perm_addr),
    .enb          (enb),
    .state        (state),
    .row          (row),
    .core_addr    (core_addr),
    .mem_addr     (mem_addr)
  );

endmodule
