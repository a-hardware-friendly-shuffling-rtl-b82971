// tb_rpg_reg: checks the REG/MUX0/DEMUX group: the designed permutation after
// init, the value conditions its refill entries must meet, reads through
// MUX0 at every index, and random two-cycle capture-then-write steps
// (REG[a] <= REG[b]) against an array model.
module tb_rpg_reg;
  import rpg_ref_pkg::*;

  logic clk = 0, init, cap, we;
  logic [5:0] sel, dout;
  int checks = 0, failures = 0;
  perm64_t m;

  rpg_reg dut (.clk, .init, .sel, .cap, .we, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [5:0] got, input logic [5:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    init = 1; cap = 0; we = 0; sel = 0;
    @(posedge clk); #1;
    init = 0;
    m = designed();
    for (int i = 0; i < 64; i++) begin
      sel = 6'(i); #1;
      chk(dout, m[i], $sformatf("init REG[%0d]", i));
    end
    // the 11 entries copied into per_a during the first stage, REG[3f] down
    // to REG[35], meet the conditions printed for the designed permutation:
    // >02 >04 >06 >08 >0a <34 <36 <38 <3a <3c <3e
    for (int j = 0; j < 11; j++) begin
      sel = 6'(63 - j); #1;
      if (j < 5) chk(dout > 6'(2 + 2*j), 1, $sformatf("condition >%0h", 2 + 2*j));
      else       chk(dout < 6'('h34 + 2*(j-5)), 1, $sformatf("condition <%0h", 'h34 + 2*(j-5)));
    end
    for (int n = 0; n < 500; n++) begin
      automatic int a = $urandom_range(63);
      automatic int b = $urandom_range(63);
      sel = 6'(a); cap = 1; #1;
      chk(dout, m[a], "select read");
      @(posedge clk); #1;
      cap = 0; sel = 6'(b); we = 1;
      @(posedge clk); #1;
      we = 0;
      m[a] = m[b];
      sel = 6'($urandom_range(63)); #1;
      chk(dout, m[sel], "read after write");
    end
    // re-init restores the designed permutation
    init = 1; @(posedge clk); #1; init = 0;
    m = designed();
    for (int i = 0; i < 64; i++) begin
      sel = 6'(i); #1;
      chk(dout, m[i], "re-init");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
