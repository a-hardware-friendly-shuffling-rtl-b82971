// rpg_fifo: part (b) of the random permutation generator, the input
// multiplexer MUX1 and a DEPTH x W FIFO (64 x 6 in the paper).
//
// The FIFO is reused for two jobs: first it caches the 64 random indexes from
// the LFSR buffer, then, as each index is consumed, the selected permutation
// element takes its place, so that at the end it holds the random address
// permutation, which it then serves in a loop. Because it is always full once
// initialised, it is built as a circular buffer with a single pointer: head
// is the oldest entry mem[ptr]; one shift writes the new entry into that same
// slot and advances ptr (a pop and a push in the same cycle).
//   ena = 1 : input mode, the entry written is chosen by sel_0 (MUX1):
//             REG output, LFSR buffer, or the FIFO's own output.
//   enb = 1 : cyclic mode, the head is written back (external enable from ADDR).
// Both modes take effect at the next clock edge; head is combinational from
// the registers. rst sets ptr to 0 (the paper does not describe resets).
module rpg_fifo
  import shuffle_pkg::*;
#(
  parameter int unsigned DEPTH = PERM_N,
  parameter int unsigned W     = PERM_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         ena,
  input  logic         enb,
  input  fifo_src_e    sel_0,
  input  logic [W-1:0] din_reg,   // from MUX0 of REG
  input  logic [W-1:0] din_buf,   // from the LFSR buffer
  output logic [W-1:0] head       // idx / addr
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] ptr;
  logic [W-1:0]  din;

  assign head = mem[ptr];

  // MUX1
  always_comb begin
    unique case (sel_0)
      FIN_REG:  din = din_reg;
      FIN_BUF:  din = din_buf;
      default:  din = head;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr <= '0;
    end else if (ena || enb) begin
      mem[ptr] <= ena ? din : head;
      ptr      <= (ptr == PW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end

endmodule
