// tb_config_memory: checks reset to zero, writes all 8 configuration words
// and reads them back on both read ports.
module tb_config_memory;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1, we;
  logic [2:0] waddr, ra, rb;
  cfg_t wdata, da, db;
  cfg_t exp [8];
  int checks = 0, failures = 0;

  config_memory dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr_a(ra), .rdata_a(da),
                     .raddr_b(rb), .rdata_b(db));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = '0; ra = 0; rb = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      ra = 3'(i); #1; checks++;
      if (da !== '0) begin failures++; $display("FAIL reset %0d", i); end
    end
    for (int i = 0; i < 8; i++) begin
      exp[i] = cfg_t'(10'($urandom));
      @(negedge clk); we = 1; waddr = 3'(i); wdata = exp[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 8; i++) begin
      ra = 3'(i); rb = 3'(7 - i); #1;
      checks += 2;
      if (da !== exp[i])     begin failures++; $display("FAIL a %0d", i); end
      if (db !== exp[7 - i]) begin failures++; $display("FAIL b %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
