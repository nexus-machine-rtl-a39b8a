// tb_scanner: random 128-bit vectors of various densities (including empty,
// a single bit and all ones); the coordinates must be the set-bit positions
// in increasing order, one per cycle when ready, with last on the final one.
module tb_scanner;
  logic clk = 0, rst_n = 1, load, busy, cv, cl, cr;
  logic [127:0] vec;
  logic [6:0] coord;
  int checks = 0, failures = 0;

  scanner dut (.clk, .rst_n, .load, .vec, .busy, .coord_valid(cv), .coord, .coord_last(cl),
               .coord_ready(cr));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  task automatic run_vec(logic [127:0] v, logic stall);
    int exp [$];
    int n;
    for (int i = 0; i < 128; i++) if (v[i]) exp.push_back(i);
    load = 1; vec = v; @(negedge clk); load = 0;
    n = 0;
    for (int t = 0; t < 400 && busy; t++) begin
      cr = stall ? ($urandom % 2) : 1'b1;
      #1;
      if (cv && cr) begin
        chk(int'(coord) == exp[n], "coordinate");
        chk(cl == (n == exp.size() - 1), "last");
        n++;
      end
      @(negedge clk);
    end
    chk(n == exp.size(), $sformatf("count %0d of %0d", n, exp.size()));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    logic [127:0] v;
    load = 0; vec = '0; cr = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    run_vec('0, 0);
    run_vec(128'h1 << 127, 0);
    run_vec('1, 0);
    // rate: 16 non-zeros in 16 cycles
    v = '0;
    for (int i = 0; i < 16; i++) v[i * 8 + 3] = 1'b1;
    load = 1; vec = v; @(negedge clk); load = 0; cycles = 0;
    while (busy) begin @(negedge clk); cycles++; end
    chk(cycles == 16, $sformatf("16 coordinates in %0d cycles", cycles));
    for (int k = 0; k < 60; k++) begin
      v = {$urandom, $urandom, $urandom, $urandom};
      if (k % 3 == 0) v = v & {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      run_vec(v, k[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
