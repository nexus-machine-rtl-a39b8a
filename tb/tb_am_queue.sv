// tb_am_queue: fills the 117-entry AM queue to full, checks full/count,
// drains it in order, then runs random push/pop traffic against a queue
// model kept in the testbench.
module tb_am_queue;
  logic clk = 0, rst_n = 1, push, pop, empty, full;
  logic [69:0] din, dout;
  logic [6:0]  count;
  logic [69:0] model [$];
  int checks = 0, failures = 0;

  am_queue dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  function automatic logic [69:0] rnd70();
    return {6'($urandom), 32'($urandom), 32'($urandom)};
  endfunction

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
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
    chk(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < 117; i++) begin
      din = rnd70(); push = 1; model.push_back(din);
      @(negedge clk);
    end
    push = 0;
    chk(full && count == 7'd117, "full at 117");
    while (model.size() > 0) begin
      chk(dout === model[0], "fifo order");
      void'(model.pop_front());
      pop = 1; @(negedge clk); pop = 0;
    end
    chk(empty, "empty after drain");
    for (int i = 0; i < 3000; i++) begin
      push = ($urandom % 2) && !full;
      pop  = ($urandom % 2) && !empty;
      din  = rnd70();
      if (pop) begin chk(dout === model[0], "random order"); void'(model.pop_front()); end
      if (push) model.push_back(din);
      @(negedge clk);
      chk(int'(count) == model.size(), "count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
