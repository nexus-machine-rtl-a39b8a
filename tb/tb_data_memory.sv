// tb_data_memory: writes a pattern to every word of the 512-word data memory,
// reads it back (data one cycle after the read enable) and checks that a
// disabled cycle leaves the read register unchanged.
module tb_data_memory;
  logic clk = 0, en, we;
  logic [8:0]  addr;
  logic [15:0] wdata, rdata;
  int checks = 0, failures = 0;

  data_memory dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  function automatic logic [15:0] pat(int i);
    return 16'(i * 40503 + 17);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 9'(i); wdata = pat(i);
    end
    for (int i = 511; i >= 0; i--) begin
      @(negedge clk); en = 1; we = 0; addr = 9'(i);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== pat(i)) begin failures++; $display("FAIL addr %0d: %h", i, rdata); end
    end
    // no access: read register holds
    @(negedge clk); en = 0; addr = 9'd3;
    @(negedge clk);
    checks++;
    if (rdata !== pat(0)) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
