// addr_ctrl: address controller (ADDR). It sits between the Kyber core's
// controller and its memories and, while an operation is being shuffled,
// replaces the core's sequential RAM/ROM addresses by addresses taken from
// the random permutation served by the RPG.
//
// Part (b), permutation pipeline: BUF holds the current permutation element
// addr; addr_r1 and addr_r12 are addr delayed by 1 and 12 cycles. CNTR counts
// the cycles of the operation; count[0] and its 1- and 12-cycle delays pick
// the even/odd half of a 7-bit address. BUF takes the RPG output each time the
// RPG FIFO is advanced (enb). enb advances it every other cycle (on odd count)
// for PWM and subtraction, where each element is used for two cycles, and
// every cycle for INTT. One extra advance right after the RPG finishes
// preloads BUF, so addr already shows the first element in the operation's
// first cycle; after 64 uses the FIFO has gone round once and addr is back at
// the first element, so the same permutation serves every row/operation.
//
// Part (d), shuffled addresses (8 bits, zero-extended where shorter):
//   addr0 = {row, addr} in PWM (permutations 00-3f, 40-7f, 80-bf, c0-ff),
//           addr otherwise                          (select: state_r1)
//   addr1 = addr
//   addr2 = {addr, count[0]}                        (00-7f)
//   addr3 = addr_r12
//   addr4 = {addr_r12, count_r12[0]}
//   addr5 = {addr_r1, count_r1[0]} in PWM, addr_r1 otherwise (select: state_r2)
// Parts (a), (c), replacement: the six fields of mem_addr (raddr_ram0,
// raddr_ram1, raddr_ram2, waddr_ram0, waddr_ram2, raddr_rom, the paper's
// raddr'_RAM0 ... raddr'_ROM_r1) take addr0..addr5 instead of the same fields
// of core_addr when repl0..repl5 are set; repl0-2 follow state, repl3-4 follow
// state_r12 and repl5 follows state_r1. All outputs are combinational from
// registers and the core's address inputs.
//
// Following the paper's figure: the signals above, the 1D/12D delays, the
// concatenations and which delayed state steers which multiplexer. This
// design's own choices: the operation encoding (shuf_op_e), which operation
// uses which input of the addr0/addr5 multiplexers, enb on odd counts, the
// preload advance, and the 8-bit address width. The core must only request a
// shuffled operation once rpg_finish is high (checked by an assertion).
module addr_ctrl
  import shuffle_pkg::*;
#(
  parameter int unsigned LAT = WR_LAT   // write-side delay, 12D
) (
  input  logic     clk,
  input  logic     rst,
  // RPG side
  input  logic     rpg_finish,
  input  perm_t    rpg_addr,
  output logic     enb,
  // core controller side
  input  shuf_op_e state,
  input  logic [1:0] row,
  input  mem_addrs_t core_addr,   // the core's own addresses
  // memory side
  output mem_addrs_t mem_addr     // addresses to the RAMs and ROM
);

  logic [6:0] count;
  logic       preloaded, preload, consume;
  perm_t      addr, addr_r1;
  perm_t      addr_d   [LAT];
  logic       count_d  [LAT];
  shuf_op_e   state_d  [LAT];
  perm_t      addr_r12;
  logic       count_r1, count_r12;
  shuf_op_e   state_r1, state_r2, state_r12;
  logic       repl0, repl1, repl2, repl3, repl4, repl5;
  maddr_t     addr0, addr1, addr2, addr3, addr4, addr5;

  // CNTR and enb
  always_ff @(posedge clk) begin
    if (rst || state == OP_OFF) count <= '0;
    else                        count <= count + 1'b1;
  end

  always_comb begin
    unique case (state)
      OP_PWM, OP_SUB: consume = count[0];
      OP_INTT:        consume = 1'b1;
      default:        consume = 1'b0;
    endcase
    preload = rpg_finish && !preloaded;
    enb     = rpg_finish && (preload || consume);
  end

  always_ff @(posedge clk) begin
    if (rst || !rpg_finish) preloaded <= 1'b0;
    else if (preload)       preloaded <= 1'b1;
  end

  // BUF and the 1D / 12D shift registers
  always_ff @(posedge clk) begin
    if (rst) begin
      addr <= '0;
      for (int i = 0; i < LAT; i++) begin
        addr_d[i]  <= '0;
        count_d[i] <= 1'b0;
        state_d[i] <= OP_OFF;
      end
    end else begin
      if (enb) addr <= rpg_addr;
      addr_d[0]  <= addr;
      count_d[0] <= count[0];
      state_d[0] <= state;
      for (int i = 1; i < LAT; i++) begin
        addr_d[i]  <= addr_d[i-1];
        count_d[i] <= count_d[i-1];
        state_d[i] <= state_d[i-1];
      end
    end
  end

  assign addr_r1   = addr_d[0];
  assign addr_r12  = addr_d[LAT-1];
  assign count_r1  = count_d[0];
  assign count_r12 = count_d[LAT-1];
  assign state_r1  = state_d[0];
  assign state_r2  = state_d[1];
  assign state_r12 = state_d[LAT-1];

  // part (d)
  always_comb begin
    addr0 = (state_r1 == OP_PWM) ? {row, addr} : maddr_t'(addr);
    addr1 = maddr_t'(addr);
    addr2 = maddr_t'({addr, count[0]});
    addr3 = maddr_t'(addr_r12);
    addr4 = maddr_t'({addr_r12, count_r12});
    addr5 = (state_r2 == OP_PWM) ? maddr_t'({addr_r1, count_r1}) : maddr_t'(addr_r1);
  end

  // part (c)
  assign repl0 = (state     != OP_OFF);
  assign repl1 = (state     != OP_OFF);
  assign repl2 = (state     != OP_OFF);
  assign repl3 = (state_r12 != OP_OFF);
  assign repl4 = (state_r12 != OP_OFF);
  assign repl5 = (state_r1  != OP_OFF);

  // part (a)
  assign mem_addr.raddr_ram0 = repl0 ? addr0 : core_addr.raddr_ram0;
  assign mem_addr.raddr_ram1 = repl1 ? addr1 : core_addr.raddr_ram1;
  assign mem_addr.raddr_ram2 = repl2 ? addr2 : core_addr.raddr_ram2;
  assign mem_addr.waddr_ram0 = repl3 ? addr3 : core_addr.waddr_ram0;
  assign mem_addr.waddr_ram2 = repl4 ? addr4 : core_addr.waddr_ram2;
  assign mem_addr.raddr_rom  = repl5 ? addr5 : core_addr.raddr_rom;

  // A shuffled operation needs a finished, preloaded permutation.
  a_perm_ready: assert property (@(posedge clk) disable iff (rst)
    (state != OP_OFF) |-> (rpg_finish && preloaded));

endmodule
