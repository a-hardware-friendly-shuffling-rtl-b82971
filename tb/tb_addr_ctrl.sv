// tb_addr_ctrl: checks the address controller against a cycle model, using a
// behavioural stand-in for the RPG FIFO that serves a random permutation p and
// advances on enb. For every cycle it compares all six outputs with the
// paper's address formulas (row concatenation, even/odd suffix, 1- and
// 12-cycle delays, state-steered replacement) and checks pass-through when
// shuffling is off. Per PWM row it also checks coverage: RAM0 reads
// {row, p[j]} twice each, RAM2 reads every address 00..7f once, and the
// write addresses repeat the read addresses 12 cycles later.
module tb_addr_ctrl;
  import shuffle_pkg::*;

  logic clk = 0, rst, rpg_finish, enb;
  perm_t rpg_addr;
  shuf_op_e state;
  logic [1:0] row;
  mem_addrs_t core_addr, mem_addr;
  int checks = 0, failures = 0;

  addr_ctrl dut (.*);

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
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // RPG FIFO stand-in
  perm_t p [64];
  int    ptr;
  assign rpg_addr = p[ptr];
  always_ff @(posedge clk) if (enb) ptr <= (ptr + 1) % 64;

  // cycle model: expected BUF element, count bit and state per cycle
  int       t = 0;
  int       consumed;       // elements used since the preload
  int       cnt;
  perm_t    ha [int];
  bit       hc [int];
  shuf_op_e hs [int];
  int       enb_count = 0;

  always @(posedge clk) if (enb) enb_count++;

  task automatic cycle(input shuf_op_e st, input logic [1:0] rw);
    perm_t a;
    maddr_t e;
    #1;
    state = st; row = rw;
    core_addr.raddr_ram0 = maddr_t'($urandom); core_addr.raddr_ram1 = maddr_t'($urandom);
    core_addr.raddr_ram2 = maddr_t'($urandom); core_addr.waddr_ram0 = maddr_t'($urandom);
    core_addr.waddr_ram2 = maddr_t'($urandom); core_addr.raddr_rom  = maddr_t'($urandom);
    #1;
    a = p[consumed % 64];
    ha[t] = a; hc[t] = cnt[0]; hs[t] = st;
    e = (st == OP_OFF) ? core_addr.raddr_ram0 : (hs[t-1] == OP_PWM) ? {rw, a} : maddr_t'(a);
    chk(mem_addr.raddr_ram0, e, $sformatf("t=%0d raddr_ram0", t));
    e = (st == OP_OFF) ? core_addr.raddr_ram1 : maddr_t'(a);
    chk(mem_addr.raddr_ram1, e, "raddr_ram1");
    e = (st == OP_OFF) ? core_addr.raddr_ram2 : maddr_t'({a, cnt[0]});
    chk(mem_addr.raddr_ram2, e, "raddr_ram2");
    e = (hs[t-12] == OP_OFF) ? core_addr.waddr_ram0 : maddr_t'(ha[t-12]);
    chk(mem_addr.waddr_ram0, e, "waddr_ram0");
    e = (hs[t-12] == OP_OFF) ? core_addr.waddr_ram2 : maddr_t'({ha[t-12], hc[t-12]});
    chk(mem_addr.waddr_ram2, e, "waddr_ram2");
    e = (hs[t-1] == OP_OFF) ? core_addr.raddr_rom :
        (hs[t-2] == OP_PWM) ? maddr_t'({ha[t-1], hc[t-1]}) : maddr_t'(ha[t-1]);
    chk(mem_addr.raddr_rom, e, "raddr_rom");
    // advance the model
    if ((st == OP_PWM || st == OP_SUB) && cnt[0]) consumed++;
    if (st == OP_INTT) consumed++;
    cnt = (st == OP_OFF) ? 0 : cnt + 1;
    @(posedge clk); t++;
  endtask

  task automatic pwm_row(input logic [1:0] rw);
    int seen0 [int];
    bit seen2 [int];
    for (int i = 0; i < 128; i++) begin
      cycle(OP_PWM, rw);
      seen0[mem_addr.raddr_ram0]++;
      seen2[mem_addr.raddr_ram2] = 1;
    end
    chk(seen0.num(), 64, "RAM0 addresses per row");
    foreach (seen0[k]) begin
      chk(k >> 6, rw, "RAM0 address in row range");
      chk(seen0[k], 2, "RAM0 address used twice");
    end
    chk(seen2.num(), 128, "RAM2 covers 00..7f");
  endtask

  initial begin
    // random permutation for the stand-in
    for (int i = 0; i < 64; i++) p[i] = perm_t'(i);
    for (int i = 63; i > 0; i--) begin
      automatic int j = $urandom_range(i);
      automatic perm_t tmp = p[i];
      p[i] = p[j]; p[j] = tmp;
    end
    ptr = 0; consumed = 0; cnt = 0;
    for (int i = -16; i < 0; i++) begin ha[i] = '0; hc[i] = 0; hs[i] = OP_OFF; end
    rst = 1; rpg_finish = 0; state = OP_OFF; row = 0;
    core_addr.raddr_ram0 = 0; core_addr.raddr_ram1 = 0; core_addr.raddr_ram2 = 0; core_addr.waddr_ram0 = 0; core_addr.waddr_ram2 = 0; core_addr.raddr_rom = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    @(posedge clk);
    // permutation not ready: addresses pass through, no enb
    repeat (20) cycle(OP_OFF, 0);
    chk(enb_count, 0, "no enb before finish");
    rpg_finish = 1;
    repeat (5) cycle(OP_OFF, 0);
    chk(enb_count, 1, "one preload advance");
    // PWM over three rows, back to back, then a gap
    for (int r = 0; r < 3; r++) pwm_row(2'(r));
    cycle(OP_OFF, 0);
    chk(enb_count, 1 + 3*64, "PWM uses one element per two cycles");
    repeat (15) cycle(OP_OFF, 0);
    // INTT, two passes of 64 cycles
    repeat (128) cycle(OP_INTT, 0);
    repeat (15) cycle(OP_OFF, 0);
    // subtraction, one polynomial
    repeat (128) cycle(OP_SUB, 0);
    repeat (15) cycle(OP_OFF, 3);
    // random mix
    for (int n = 0; n < 40; n++) begin
      automatic shuf_op_e st = shuf_op_e'($urandom_range(3));
      repeat ($urandom_range(1, 30)) cycle(st, 2'($urandom));
    end
    repeat (15) cycle(OP_OFF, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
