// tb_sep_allocator: replays the four-requestor example of the published
// allocator figure (with one resource under backpressure), then random
// request matrices against a reference model of the same two-stage policy.
// Also checks that grants are a subset of requests on outputs that are On
// and that no input or output is granted twice.
module tb_sep_allocator;
  logic clk = 0, rst_n = 1;
  logic [4:0][4:0] req, gnt, exp;
  logic [4:0]      out_on;
  int ptr [5];
  int checks = 0, failures = 0;

  sep_allocator dut (.clk, .rst_n, .req, .out_on, .gnt);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  function automatic logic [4:0][4:0] model(logic [4:0][4:0] r, logic [4:0] on);
    logic [4:0][4:0] s1, g;
    s1 = '0; g = '0;
    for (int o = 0; o < 5; o++)
      for (int n = 1; n <= 5; n++) begin
        int k;
        k = (ptr[o] + n) % 5;
        if (r[k][o]) begin s1[k][o] = 1; break; end
      end
    for (int i = 0; i < 5; i++)
      for (int o = 0; o < 5; o++)
        if (s1[i][o] && on[o]) begin g[i][o] = 1; break; end
    return g;
  endfunction

  task automatic step();
    exp = model(req, out_on);
    #1;
    checks++;
    if (gnt !== exp) begin failures++; $display("FAIL req=%h on=%b gnt=%h exp=%h", req, out_on, gnt, exp); end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if ($countones(gnt[i]) > 1 || (gnt[i] & ~req[i] & 5'h1F) != 0 || (gnt[i] & ~out_on) != 0) begin
        failures++; $display("FAIL row %0d", i);
      end
    end
    @(negedge clk);
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++) if (exp[i][o]) ptr[o] = i;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 5; o++) ptr[o] = 4;
    req = '0; out_on = '1;
    repeat (2) @(negedge clk); rst_n = 1;
    // Figure example: resources 0..3 (rows) requested by requestors 0..3.
    // resource0: 1010 -> requestors 0,2; resource1: 0010 -> 2;
    // resource2: 0001 -> 3; resource3: 1110 -> 0,1,2; backpressure 1,1,0,1.
    req = '0;
    req[0][0] = 1; req[2][0] = 1;
    req[2][1] = 1;
    req[3][2] = 1;
    req[0][3] = 1; req[1][3] = 1; req[2][3] = 1;
    out_on = 5'b11011;
    #1;
    checks++;
    if (!(gnt[0][0] && gnt[2][1] && gnt[3] == 0 && gnt[1] == 0 && $countones(gnt) == 2)) begin
      failures++; $display("FAIL figure example gnt=%h", gnt);
    end
    step();
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 5; i++) req[i] = 5'($urandom);
      out_on = 5'($urandom) | 5'($urandom);
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
