// tb_rpg_ctrl: drives the controller with a start pulse, an index-valid
// strobe every six cycles and a model of the rest counter, and checks the
// schedule it produces: 64 buffer pushes, then 64 two-cycle Fisher-Yates steps
// (12 with idx_0, 52 with idx_1), then six loop shifts, then finish; the REG
// and counter strobes of each phase; and the total cycle count.
module tb_rpg_ctrl;
  import shuffle_pkg::*;

  logic clk = 0, rst, start, idx_valid;
  logic [5:0] rest;
  logic ena, finish, reg_cap, reg_we, cnt_dec;
  fifo_src_e sel_0;
  idx_sel_e  sel_1;
  int checks = 0, failures = 0;

  rpg_ctrl dut (.clk, .rst, .start, .idx_valid, .rest, .ena, .sel_0, .sel_1,
                .finish, .reg_cap, .reg_we, .cnt_dec);

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
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // rest counter model and index strobe
  int vcnt;
  always_ff @(posedge clk) begin
    if (rst || start) rest <= 6'd63;
    else if (cnt_dec)    rest <= rest - 1'b1;
    vcnt <= (rst || start || vcnt == 5) ? 0 : vcnt + 1;
  end
  assign idx_valid = (vcnt == 5);

  task automatic one_run();
    int pushes = 0, sel0 = 0, sel1 = 0, writes = 0, shifts = 0, cyc = 0, inits = 0;
    int pend = 0;
    start = 1; #1;
    chk(ena, 0, "no FIFO write on start");
    @(posedge clk); #1; start = 0;
    while (!finish && cyc < 2000) begin
      if (ena && sel_0 == FIN_BUF) begin
        pushes++;
        chk(idx_valid, 1, "push only with a valid index");
      end
      if (reg_cap) begin
        chk(ena, 1, "select step pushes");
        chk(sel_0, FIN_REG, "select step takes REG");
        chk(pushes, 64, "select after full fill");
        chk(pend, 0, "alternating select/write");
        if (sel_1 == IDX_SEL0) sel0++; else if (sel_1 == IDX_SEL1) sel1++;
        chk(sel_1 == IDX_SEL0, (63 - rest) < 12, "stage by rest");
        pend = 1;
      end
      if (reg_we) begin
        chk(sel_1, IDX_REST, "write reads REG[rest]");
        chk(cnt_dec, 1, "write decrements rest");
        chk(pend, 1, "write after select");
        pend = 0;
        writes++;
      end
      if (ena && sel_0 == FIN_LOOP) begin
        shifts++;
        chk(writes, 64, "shift after 64 steps");
      end
      @(posedge clk); #1; cyc++;
    end
    chk(pushes, 64, "pushes");
    chk(sel0, 12, "shuffling_12 steps");
    chk(sel1, 52, "shuffling_52 steps");
    chk(writes, 64, "REG writes");
    chk(shifts, 6, "cyclic shifts");
    // 64 indexes at one per six cycles, 128 step cycles, 6 shifts
    chk(cyc >= 64*6 + 128 + 6 && cyc <= 64*6 + 128 + 6 + 8, 1, "cycle count");
    $display("generation took %0d cycles", cyc);
    repeat (10) begin
      @(posedge clk); #1;
      chk(finish, 1, "finish holds");
      chk(ena, 0, "idle FIFO");
      chk(sel_0, FIN_LOOP, "loop input when done");
    end
  endtask

  initial begin
    rst = 1; start = 0;
    repeat (2) @(posedge clk); #1; rst = 0;
    chk(finish, 0, "not finished after reset");
    repeat (5) @(posedge clk); #1;
    chk(ena, 0, "idle before start");
    one_run();
    one_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
