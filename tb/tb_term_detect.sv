// tb_term_detect: done only after two quiet cycles with run high; irq is a
// single pulse; any busy PE or loader, or run low, keeps done low.
module tb_term_detect;
  logic clk = 0, rst_n = 1, run, ext_busy, done, irq;
  logic [15:0] pe_busy;
  int checks = 0, failures = 0, irqs = 0;

  term_detect dut (.clk, .rst_n, .run, .pe_busy, .ext_busy, .done, .irq);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires
  always @(posedge clk) if (irq) irqs++;

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run = 0; ext_busy = 0; pe_busy = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (4) @(negedge clk);
    chk(!done && irqs == 0, "nothing while run low");
    run = 1; pe_busy = 16'h0100;
    repeat (5) @(negedge clk);
    chk(!done, "busy PE");
    pe_busy = 0; ext_busy = 1;
    repeat (5) @(negedge clk);
    chk(!done, "busy loader");
    ext_busy = 0;
    @(negedge clk); chk(!done, "not after one quiet cycle");
    @(negedge clk); chk(done && irq, "done and irq after two");
    @(negedge clk); chk(done && !irq, "irq is one cycle");
    repeat (5) @(negedge clk);
    chk(irqs == 1, "one interrupt");
    pe_busy = 16'h8000; @(negedge clk); @(negedge clk);
    chk(!done, "done falls when busy again");
    pe_busy = 0; repeat (3) @(negedge clk);
    chk(done && irqs == 2, "second completion");
    run = 0; @(negedge clk); @(negedge clk);
    chk(!done, "run low clears done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
