// tb_router_inbuf: random push/pop traffic into a three-register input
// buffer while obeying its On/Off signal like an upstream router would.
// Checks FIFO order, the occupancy, and that On/Off follows the thresholds
// (OFF once free space is 1 or less, ON once it is 2 or more), and that
// OFF was seen at least once.
module tb_router_inbuf;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1, push, pop, valid, on;
  am_t  din, dout;
  logic [1:0] count;
  am_t  model [$];
  int checks = 0, failures = 0, offs = 0;

  router_inbuf dut (.clk, .rst_n, .push, .din, .pop, .valid, .dout, .on, .count);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(on && !valid, "on after reset");
    for (int i = 0; i < 4000; i++) begin
      push = on && ($urandom % 4 != 0);
      pop  = valid && ($urandom % 3 == 0);
      din  = am_t'({6'($urandom), 32'($urandom), 32'($urandom)});
      if (valid) chk(dout === model[0], "order");
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
      @(negedge clk);
      chk(int'(count) == model.size(), "count");
      chk(model.size() <= 3, "capacity");
      if (3 - model.size() <= 1) chk(!on, "OFF at free<=1");
      if (3 - model.size() >= 2) chk(on, "ON at free>=2");
      if (!on) offs++;
    end
    chk(offs > 0, "OFF seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
