// tb_rpg_lfsr: checks the LFSR and its 6-bit buffer against the bit
// recurrence of the reference model: the start pulse after seeding, one
// index every six cycles with the right value, the freeze while finish is
// high, and reseeding.
module tb_rpg_lfsr;
  import rpg_ref_pkg::*;

  logic clk = 0, rst, rst_l, finish, start, idx_valid;
  logic [31:0] seed;
  logic [5:0] idx;
  int checks = 0, failures = 0;

  rpg_lfsr dut (.clk, .rst, .seed, .rst_l, .finish, .start, .idx, .idx_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  // seed, then collect n indexes; the LFSR is frozen for `hold` cycles
  // after the 10th index
  task automatic run(input logic [31:0] sd, input int hold);
    perm64_t ix = indexes(sd);
    int got = 0, cyc = 0, last = 0, starts = 0;
    seed = sd; rst_l = 1; finish = 0;
    @(posedge clk); #1; rst_l = 0;
    while (got < 64) begin
      if (start) starts++;
      if (idx_valid) begin
        chk(idx, ix[got], $sformatf("index %0d", got));
        if (got > 0) chk(cyc - last, 6, "six cycles per index");
        last = cyc;
        got++;
        if (got == 10 && hold > 0) begin
          finish = 1;
          repeat (hold) begin
            @(posedge clk); #1;
            if (idx_valid) begin failures++; $display("FAIL index while frozen"); end
          end
          finish = 0;
        end
      end
      @(posedge clk); #1; cyc++;
    end
    chk(starts, 1, "one start pulse");
  endtask

  initial begin
    rst = 1; rst_l = 0; finish = 1; seed = 0;
    repeat (2) @(posedge clk); #1; rst = 0;
    run(32'hdeadbeef, 0);
    run(32'h12345678, 17);
    run(32'h00000000, 0);
    for (int n = 0; n < 5; n++) run($urandom, $urandom_range(20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
