// tb_rpg: runs the whole random permutation generator for several seeds and
// compares the served permutation, entry by entry, with the reference model;
// also checks that each result is a permutation of 00..3f, that finish comes
// within the expected number of cycles, that enb rotates the permutation in a
// loop, and that reseeding while finished produces the next permutation.
module tb_rpg;
  import rpg_ref_pkg::*;

  logic clk = 0, rst, rst_l, enb, finish;
  logic [31:0] seed;
  logic [5:0] addr;
  int checks = 0, failures = 0;
  bit first = 1;

  rpg dut (.clk, .rst, .seed, .rst_l, .enb, .addr, .finish);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic gen(input logic [31:0] sd);
    perm64_t e = expected(sd), g;
    int cyc = 0;
    seed = sd; rst_l = 1;
    @(posedge clk); #1; rst_l = 0; seed = $urandom;
    repeat (2) begin @(posedge clk); #1; cyc++; end
    chk(finish, 0, "finish drops on reseed");
    while (!finish && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    // finish is high in the 520th cycle after the seed-load cycle (2 cycles
    // of start-up, 384 fill, 128 shuffle, 6 rotate); 522 when a finished
    // permutation is replaced, as the LFSR only restarts once finish drops
    chk(cyc + 1, first ? 520 : 522, "generation latency");
    first = 0;
    // idle cycles do not move the permutation
    repeat (3) @(posedge clk); #1;
    for (int rnd = 0; rnd < 2; rnd++) begin
      for (int i = 0; i < 64; i++) begin
        g[i] = addr;
        chk(addr, e[i], $sformatf("seed %h entry %0d", sd, i));
        enb = 1; @(posedge clk); #1; enb = 0;
        if ($urandom_range(1)) begin @(posedge clk); #1; end
      end
      chk(is_perm(g), 1, "is a permutation");
    end
  endtask

  initial begin
    rst = 1; rst_l = 0; enb = 0; seed = 0;
    repeat (2) @(posedge clk); #1; rst = 0;
    gen(32'hcafef00d);
    gen(32'h00000001);
    gen(32'h00000000);
    for (int n = 0; n < 6; n++) gen($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
