// tb_rpg_fifo: checks the FIFO and MUX1 against a queue model: filling from
// the buffer input, simultaneous pop/push from the REG input, cyclic mode by
// the external enb (whatever sel_0 says) and by the loop input, and hold when
// idle.
module tb_rpg_fifo;
  import shuffle_pkg::*;

  logic clk = 0, rst, ena, enb;
  fifo_src_e sel_0;
  logic [5:0] din_reg, din_buf, head;
  int checks = 0, failures = 0;
  logic [5:0] q [$];

  rpg_fifo dut (.clk, .rst, .ena, .enb, .sel_0, .din_reg, .din_buf, .head);

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

  // one shift of the model: pop the head, push d
  task automatic step(input logic a, input logic b, input fifo_src_e s);
    logic [5:0] d;
    ena = a; enb = b; sel_0 = s;
    din_reg = 6'($urandom); din_buf = 6'($urandom);
    #1;
    if (a || b) begin
      chk(head, q[0], "head before shift");
      d = !a ? q[0] : (s == FIN_REG) ? din_reg : (s == FIN_BUF) ? din_buf : q[0];
      void'(q.pop_front());
      q.push_back(d);
    end
    @(posedge clk); #1;
    ena = 0; enb = 0;
  endtask

  initial begin
    rst = 1; ena = 0; enb = 0; sel_0 = FIN_LOOP; din_reg = 0; din_buf = 0;
    @(posedge clk); #1; rst = 0;
    // fill: 64 pushes from BUF, every entry overwritten
    for (int i = 0; i < 64; i++) q.push_back('0);
    for (int i = 0; i < 64; i++) begin
      ena = 1; enb = 0; sel_0 = FIN_BUF; din_buf = 6'($urandom); #1;
      void'(q.pop_front()); q.push_back(din_buf);
      @(posedge clk); #1;
    end
    ena = 0;
    chk(head, q[0], "head after fill");
    for (int n = 0; n < 400; n++) begin
      automatic int r = $urandom_range(4);
      case (r)
        0: step(1, 0, FIN_REG);
        1: step(1, 0, FIN_LOOP);
        2: step(0, 1, fifo_src_e'($urandom_range(1)));
        3: step(1, 0, FIN_BUF);
        default: step(0, 0, FIN_REG);
      endcase
      chk(head, q[0], "head after step");
    end
    // a full turn of cyclic mode returns every entry in order
    for (int i = 0; i < 64; i++) step(0, 1, FIN_BUF);
    chk(head, q[0], "after full rotation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
