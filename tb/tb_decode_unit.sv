// tb_decode_unit: loads the data memory through the host port, then checks
// dereference mode (one word, two cycles after the command), streaming mode
// with a stalling consumer (every element, in order, with its offset and the
// last flag), a zero-length stream, and a write followed by a read.
module tb_decode_unit;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1;
  logic cmd_valid, cmd_ready, elem_valid, elem_last, elem_ready, busy;
  du_mode_e cmd_mode;
  logic [15:0] cmd_base, cmd_count, cmd_wdata, elem, elem_idx, h_wdata, h_rdata;
  logic h_en, h_we;
  logic [8:0] h_addr;
  int checks = 0, failures = 0;

  decode_unit dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_mode, .cmd_base, .cmd_count,
    .cmd_wdata, .elem_valid, .elem, .elem_idx, .elem_last, .elem_ready, .busy,
    .h_en, .h_we, .h_addr, .h_wdata, .h_rdata);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  task automatic cmd(du_mode_e m, int b, int c, int w);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_mode = m; cmd_base = 16'(b); cmd_count = 16'(c); cmd_wdata = 16'(w);
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, lat;
    cmd_valid = 0; cmd_mode = DU_DEREF; cmd_base = 0; cmd_count = 0; cmd_wdata = 0;
    elem_ready = 0; h_en = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 512; i++) begin
      h_en = 1; h_we = 1; h_addr = 9'(i); h_wdata = 16'(i * 3 + 1);
      @(negedge clk);
    end
    h_en = 0; h_we = 0;
    // dereference
    elem_ready = 1;
    cmd(DU_DEREF, 37, 0, 0);
    lat = 1;
    while (!elem_valid) begin @(negedge clk); lat++; end
    chk(elem == 16'(37 * 3 + 1) && elem_last, "deref value");
    chk(lat == 2, $sformatf("deref latency %0d", lat));
    @(negedge clk);
    // streaming with stalls
    cmd(DU_STREAM, 100, 20, 0);
    n = 0;
    for (int t = 0; t < 200 && n < 20; t++) begin
      elem_ready = ($urandom % 3 != 0);
      #1;
      if (elem_valid && elem_ready) begin
        chk(elem == 16'((100 + n) * 3 + 1), "stream value");
        chk(elem_idx == 16'(n), "stream offset");
        chk(elem_last == (n == 19), "stream last");
        n++;
      end
      @(negedge clk);
    end
    chk(n == 20, "stream count");
    elem_ready = 1;
    repeat (2) @(negedge clk);
    chk(!busy, "idle after stream");
    // full-rate streaming: 8 elements in 8 consecutive cycles
    cmd(DU_STREAM, 0, 8, 0);
    n = 0; lat = 0;
    for (int t = 0; t < 12; t++) begin
      if (elem_valid) n++;
      if (n > 0 && n < 8) lat++;
      @(negedge clk);
    end
    chk(n == 8 && lat == 7, $sformatf("one element per cycle n=%0d", n));
    // zero-length stream
    cmd(DU_STREAM, 0, 0, 0);
    repeat (2) @(negedge clk);
    chk(!busy && !elem_valid, "zero-length stream");
    // write then read
    cmd(DU_WRITE, 200, 0, 16'hBEEF);
    cmd(DU_DEREF, 200, 0, 0);
    while (!elem_valid) @(negedge clk);
    chk(elem == 16'hBEEF, "write then read");
    @(negedge clk);
    h_en = 1; h_addr = 9'd201; @(negedge clk); h_en = 0;
    chk(h_rdata == 16'(201 * 3 + 1), "host read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
