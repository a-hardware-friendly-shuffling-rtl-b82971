// tb_kyber_shuffle: end-to-end test of the shuffling unit at its default
// sizes. It plays the part of the Kyber core's controller for the shuffled
// steps of a decryption: for each of two seeds (k = 2 and k = 3 rows, as in
// Kyber512 and Kyber768) it loads the seed, waits for the permutation, runs
// PWM over k rows, seven INTT passes and one subtraction, with idle gaps in
// which the core's own addresses must pass through. Every shuffled address is
// compared with the permutation computed by the reference model for that
// seed, and the generation latency is checked. It also counts how often each
// mechanism of the design was exercised (random-index fill, the Eq. (10)
// subtraction, the Eq. (11) AND, REG refills, the cyclic shift, the preload
// advance, pass-through, the 12-cycle write delay, reseeding) and counts a
// failure for any that never happened.
module tb_kyber_shuffle;
  import shuffle_pkg::*;
  import rpg_ref_pkg::*;

  logic clk = 0, rst, rst_l, rpg_finish;
  logic [31:0] seed;
  shuf_op_e state;
  logic [1:0] row;
  mem_addrs_t core_addr, mem_addr;
  int checks = 0, failures = 0;

  kyber_shuffle dut (.*);

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

  // mechanism counters, observed inside the design
  int n_fill = 0, n_sub28 = 0, n_and = 0, n_refill = 0, n_shift = 0;
  int n_preload = 0, n_bypass = 0, n_delayed_wr = 0, n_reseed = 0;
  always @(posedge clk) begin
    if (dut.u_rpg.ena && dut.u_rpg.sel_0 == FIN_BUF) n_fill++;
    if (dut.u_rpg.sel_1 == IDX_SEL0 && dut.u_rpg.reg_cap && dut.u_rpg.head > 6'h28) n_sub28++;
    if (dut.u_rpg.sel_1 == IDX_SEL1 && dut.u_rpg.reg_cap && dut.u_rpg.head > dut.u_rpg.rest) n_and++;
    if (dut.u_rpg.reg_we) n_refill++;
    if (dut.u_rpg.ena && dut.u_rpg.sel_0 == FIN_LOOP) n_shift++;
    if (dut.u_addr.preload) n_preload++;
  end

  // expected address stream per cycle, for the 12-cycle write check
  perm_t    wa [int];
  bit       wc [int];
  shuf_op_e ws [int];
  int       t = 0;

  task automatic drive_orig();
    core_addr.raddr_ram0 = maddr_t'($urandom); core_addr.raddr_ram1 = maddr_t'($urandom);
    core_addr.raddr_ram2 = maddr_t'($urandom); core_addr.waddr_ram0 = maddr_t'($urandom);
    core_addr.waddr_ram2 = maddr_t'($urandom); core_addr.raddr_rom  = maddr_t'($urandom);
  endtask

  // one cycle of the core: element a of the permutation with count bit c
  task automatic cycle(input shuf_op_e st, input logic [1:0] rw, input perm_t a, input bit c);
    #1;
    state = st; row = rw;
    drive_orig();
    #1;
    wa[t] = a; wc[t] = c; ws[t] = st;
    if (st == OP_OFF) begin
      n_bypass++;
      chk(mem_addr.raddr_ram0, core_addr.raddr_ram0, "bypass RAM0");
      chk(mem_addr.raddr_ram1, core_addr.raddr_ram1, "bypass RAM1");
      chk(mem_addr.raddr_ram2, core_addr.raddr_ram2, "bypass RAM2");
    end else begin
      chk(mem_addr.raddr_ram0, (st == OP_PWM && ws[t-1] == OP_PWM) ? {rw, a} : maddr_t'(a),
          $sformatf("t=%0d RAM0 read", t));
      chk(mem_addr.raddr_ram1, maddr_t'(a), "RAM1 read");
      chk(mem_addr.raddr_ram2, maddr_t'({a, c}), "RAM2 read");
    end
    if (ws.exists(t-12) && ws[t-12] != OP_OFF) begin
      n_delayed_wr++;
      chk(mem_addr.waddr_ram0, maddr_t'(wa[t-12]), "RAM0 write, 12 cycles later");
      chk(mem_addr.waddr_ram2, maddr_t'({wa[t-12], wc[t-12]}), "RAM2 write, 12 cycles later");
    end else begin
      chk(mem_addr.waddr_ram0, core_addr.waddr_ram0, "bypass RAM0 write");
      chk(mem_addr.waddr_ram2, core_addr.waddr_ram2, "bypass RAM2 write");
    end
    @(posedge clk); t++;
  endtask

  task automatic idle(input int n);
    repeat (n) cycle(OP_OFF, 0, '0, 0);
  endtask

  task automatic decryption(input logic [31:0] sd, input int k);
    perm64_t e = expected(sd);
    int cyc = 0;
    #1;
    seed = sd; rst_l = 1;
    @(posedge clk); #1; rst_l = 0;
    n_reseed++;
    repeat (3) begin @(posedge clk); cyc++; end
    chk(rpg_finish, 0, "permutation not ready after reseed");
    // the core keeps running unshuffled work meanwhile
    while (!rpg_finish && cyc < 1000) begin cycle(OP_OFF, 0, '0, 0); cyc++; end
    chk(cyc >= 518 && cyc <= 530, 1, $sformatf("generation latency %0d cycles", cyc));
    idle(4);
    // point-wise multiplication and reduction, k rows, two cycles per element
    for (int r = 0; r < k; r++)
      for (int j = 0; j < 64; j++) begin
        cycle(OP_PWM, 2'(r), e[j], 0);
        cycle(OP_PWM, 2'(r), e[j], 1);
      end
    idle(14);
    // inverse NTT, seven passes of 64 butterfly cycles
    for (int l = 0; l < 7; l++) begin
      for (int j = 0; j < 64; j++) cycle(OP_INTT, 0, e[j], 1'(j));
      idle(2);
    end
    idle(12);
    // subtraction v - INTT(...), two cycles per element
    for (int j = 0; j < 64; j++) begin
      cycle(OP_SUB, 0, e[j], 0);
      cycle(OP_SUB, 0, e[j], 1);
    end
    idle(14);
    chk(is_perm(e), 1, "reference result is a permutation");
  endtask

  initial begin
    rst = 1; rst_l = 0; seed = 0; state = OP_OFF; row = 0;
    drive_orig();
    repeat (2) @(posedge clk);
    #1 rst = 0;
    @(posedge clk);
    decryption(32'h9e3779b9, 2);   // Kyber512: k = 2
    decryption($urandom, 3);       // Kyber768: k = 3
    decryption($urandom, 4);       // Kyber1024: k = 4
    $display("mechanisms: fill=%0d sub28=%0d and=%0d refill=%0d shift=%0d preload=%0d bypass=%0d delayed_write=%0d reseed=%0d",
             n_fill, n_sub28, n_and, n_refill, n_shift, n_preload, n_bypass, n_delayed_wr, n_reseed);
    chk(n_fill, 3*64, "random-index fill pushes");
    chk(n_refill, 3*64, "REG refills");
    chk(n_shift, 3*6, "cyclic shift_6");
    chk(n_preload, 3, "preload advances");
    checks++; if (n_sub28 == 0)     begin failures++; $display("FAIL Eq. (10) subtraction never used"); end
    checks++; if (n_and == 0)       begin failures++; $display("FAIL Eq. (11) AND never used"); end
    checks++; if (n_bypass == 0)    begin failures++; $display("FAIL pass-through never used"); end
    checks++; if (n_delayed_wr == 0) begin failures++; $display("FAIL delayed write never used"); end
    checks++; if (n_reseed < 2)     begin failures++; $display("FAIL reseeding never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
