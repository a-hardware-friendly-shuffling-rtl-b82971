// tb_rpg_idx_adjust: checks Eqs. (10) and (11) and the rest counter for every
// index value at every count from 63 down to 0, including the paper's worked
// example (rest = 0x02, idx = 0x05 gives 0x00).
module tb_rpg_idx_adjust;
  import shuffle_pkg::*;

  logic clk = 0, rst, load, dec;
  idx_sel_e sel_1;
  logic [5:0] idx, idx_p, rest;
  int checks = 0, failures = 0;

  rpg_idx_adjust dut (.clk, .rst, .load, .dec, .sel_1, .idx, .idx_p, .rest);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    rst = 1; load = 0; dec = 0; sel_1 = IDX_SEL0; idx = 0;
    @(posedge clk); #1; rst = 0;
    chk(rest, 63, "rest after reset");
    for (int r = 63; r >= 0; r--) begin
      chk(rest, r, "rest count");
      for (int i = 0; i < 64; i++) begin
        automatic int e0 = (i > 40) ? i - 40 : i;
        automatic int e1 = (i > r) ? (i & r) : i;
        idx = 6'(i);
        sel_1 = IDX_SEL0; #1; chk(idx_p, e0, $sformatf("idx_0 idx=%h", i));
        chk(idx_p <= 40, 1, "idx_0 range");
        sel_1 = IDX_SEL1; #1; chk(idx_p, e1, $sformatf("idx_1 idx=%h rest=%h", i, r));
        chk(idx_p <= r, 1, "idx_1 range");
        sel_1 = IDX_REST; #1; chk(idx_p, r, "rest select");
      end
      if (r == 2) begin
        idx = 6'h05; sel_1 = IDX_SEL1; #1; chk(idx_p, 0, "worked example");
      end
      dec = 1; @(posedge clk); #1; dec = 0;
    end
    load = 1; @(posedge clk); #1; load = 0;
    chk(rest, 63, "reload");
    // hold without dec
    repeat (3) @(posedge clk); #1;
    chk(rest, 63, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
