// tb_router: one router at PE 5 (row 1, column 1) of a 4x4 mesh.
// 1. A message entering from each port for each destination leaves on the
//    expected output one cycle after it was pushed (west-first, minimal).
// 2. Backpressure: with the East downstream OFF an eastbound message waits,
//    its buffer fills, the upstream On signal drops, and all messages come
//    out in order once East turns ON.
// 3. En-route capture: an ALU message with value operands passing through an
//    idle PE is ejected to the local port; a message from the local port is
//    not captured.
module tb_router;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1, pe_idle, enroute_fire, empty, inj_empty;
  logic [4:0] in_valid, in_on, out_valid, out_on;
  am_t  [4:0] in_msg, out_msg;
  int checks = 0, failures = 0;

  router dut (.clk, .rst_n, .my_id(4'd5), .pe_idle, .in_valid, .in_msg, .in_on,
              .out_valid, .out_msg, .out_on, .enroute_fire, .empty, .inj_empty);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  function automatic am_t mk(int dest, int tag, logic alu_vals);
    am_t m;
    m = '0;
    m.r1 = 4'(dest);
    m.op2 = 16'(tag);
    m.cfg.opcode = alu_vals ? OP_MUL : OP_LOAD;
    m.cfg.res_c = alu_vals; m.cfg.op1_c = alu_vals; m.cfg.op2_c = alu_vals;
    return m;
  endfunction

  // expected output port at PE 5 (x=1,y=1) for a destination (deterministic cases)
  function automatic int exp_port(int d);
    int dx, dy;
    dx = d % 4; dy = d / 4;
    if (d == 5) return 0;
    if (dx < 1) return 4;
    if (dx == 1) return (dy < 1) ? 1 : 3;
    if (dy == 1) return 2;
    return -1;  // adaptive: several choices
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; in_msg = '0; out_on = '1; pe_idle = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. routing
    for (int p = 0; p < 5; p++)
      for (int d = 0; d < 16; d++) begin
        int e, got;
        in_valid = '0; in_valid[p] = 1; in_msg[p] = mk(d, d + 16 * p, 0);
        @(negedge clk); in_valid = '0;
        got = -1;
        for (int o = 0; o < 5; o++) if (out_valid[o]) got = o;
        e = exp_port(d);
        if (e >= 0) chk(got == e, $sformatf("route p=%0d d=%0d got=%0d", p, d, got));
        else chk(got == 2 || (got == 1 && d / 4 < 1) || (got == 3 && d / 4 > 1),
                 $sformatf("adaptive p=%0d d=%0d got=%0d", p, d, got));
        if (got >= 0) chk(out_msg[got].op2 == 16'(d + 16 * p), "payload");
        @(negedge clk);
      end
    chk(empty, "empty after routing");
    // 2. backpressure on East: three eastbound messages from West input
    out_on[2] = 0;
    for (int k = 0; k < 3; k++) begin
      in_valid = '0; in_valid[4] = in_on[4]; in_msg[4] = mk(6, 100 + k, 0);
      @(negedge clk);
    end
    in_valid = '0;
    @(negedge clk);
    chk(!out_valid[2], "held while East OFF");
    chk(!in_on[4], "West input signals OFF when full");
    out_on[2] = 1;
    for (int k = 0; k < 3; k++) begin
      #1;
      if (out_valid[2]) begin chk(out_msg[2].op2 == 16'(100 + k), "order after release"); end
      else if (in_on[4] == 0) ;
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    chk(empty, "drained");
    // 3. en-route capture: from North (port 1) to PE 13, ALU message with values
    pe_idle = 1;
    in_valid = '0; in_valid[1] = 1; in_msg[1] = mk(13, 7, 1);
    @(negedge clk); in_valid = '0;
    chk(out_valid[0] && out_msg[0].op2 == 16'd7, "captured to local");
    chk(enroute_fire, "enroute event");
    @(negedge clk);
    // from local port: not captured
    in_valid = '0; in_valid[0] = 1; in_msg[0] = mk(13, 8, 1);
    @(negedge clk); in_valid = '0;
    chk(out_valid[3] && !out_valid[0], "local injection not captured");
    // busy PE: not captured
    pe_idle = 0;
    @(negedge clk);
    in_valid = '0; in_valid[1] = 1; in_msg[1] = mk(13, 9, 1);
    @(negedge clk); in_valid = '0;
    chk(out_valid[3] && !out_valid[0], "busy PE not captured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
