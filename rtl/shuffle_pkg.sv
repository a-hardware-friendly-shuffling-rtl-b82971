// shuffle_pkg: constants, types and the designed address permutation shared
// by the random permutation generator (RPG) and the address controller (ADDR).
//
// The permutation length (64), the index width (6), the stage-1 index bound
// 0x28, the 12 stage-1 selections and the final cyclic shift of 6 are the
// paper's numbers. The designed (intermediate) permutation loaded into REG is
// the one listed in line 1 of the paper's processing schedule:
//   REG[00..28] = 0b,0c,...,33   (per_a, 41 entries)
//   REG[29..2f] = 3f,3e,...,39
//   REG[30..3a] = 0a,09,...,00
//   REG[3b..3f] = 38,37,36,35,34
// so that REG[3f], REG[3e], ... (the entries copied into per_a during the
// first stage) are 34,35,36,37,38,00,01,... as the paper requires.
// The operation encoding (shuf_op_e) and the 8-bit memory address type are
// this design's own choices: the paper does not give the core's encodings.
package shuffle_pkg;

  localparam int unsigned PERM_N     = 64;    // permutation length
  localparam int unsigned PERM_W     = 6;     // index / element width
  localparam int unsigned STAGE1_N   = 12;    // selections in shuffling_12
  localparam int unsigned STAGE1_MAX = 'h28;  // idx_0 bound (Eq. 10)
  localparam int unsigned SHIFT_N    = 6;     // cyclic shift_6
  localparam int unsigned LFSR_W     = 32;    // LFSR depth
  localparam int unsigned WR_LAT     = 12;    // 12D delay of ADDR (write side)
  localparam int unsigned MEM_AW     = 8;     // RAM/ROM address width, 00..ff

  typedef logic [PERM_W-1:0] perm_t;
  typedef logic [MEM_AW-1:0] maddr_t;

  // MUX1 (FIFO input) source select, driven as sel_0
  typedef enum logic [1:0] {
    FIN_REG  = 2'd0,   // element chosen from REG (shuffling steps)
    FIN_BUF  = 2'd1,   // 6-bit random index from the LFSR buffer
    FIN_LOOP = 2'd2    // FIFO output fed back (cyclic mode)
  } fifo_src_e;

  // MUX2 select, driven as sel_1
  typedef enum logic [1:0] {
    IDX_SEL0 = 2'd0,   // idx_0, Eq. (10), shuffling_12
    IDX_SEL1 = 2'd1,   // idx_1, Eq. (11), shuffling_52
    IDX_REST = 2'd2    // rest, to read REG[rest]
  } idx_sel_e;

  // Operation of the Kyber core that the address controller shuffles
  typedef enum logic [1:0] {
    OP_OFF  = 2'd0,    // no shuffling: original addresses pass through
    OP_PWM  = 2'd1,    // point-wise multiplication (+ modular reduction)
    OP_INTT = 2'd2,    // inverse NTT butterflies
    OP_SUB  = 2'd3     // subtraction v - INTT(...)
  } shuf_op_e;

  // The six memory addresses the controller can replace (Fig. 3(a) order)
  typedef struct packed {
    maddr_t raddr_ram0;
    maddr_t raddr_ram1;
    maddr_t raddr_ram2;
    maddr_t waddr_ram0;
    maddr_t waddr_ram2;
    maddr_t raddr_rom;
  } mem_addrs_t;

  // Designed address permutation, entry i of REG
  function automatic perm_t designed_perm(input int unsigned i);
    if (i <= 'h28)      return perm_t'('h0b + i);
    else if (i <= 'h2f) return perm_t'('h3f - (i - 'h29));
    else if (i <= 'h3a) return perm_t'('h0a - (i - 'h30));
    else                return perm_t'('h38 - (i - 'h3b));
  endfunction

endpackage
