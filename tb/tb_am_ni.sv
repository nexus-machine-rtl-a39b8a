// tb_am_ni: the AM network interface with a real configuration memory and
// AM queue. Checks that a dynamic AM gets configuration entry N_PC, that a
// static AM is the queue head with entry 0, that dynamic AMs win over static
// ones, and that nothing is injected while the router buffer is OFF or,
// for static AMs, not empty, or when run is low.
module tb_am_ni;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1;
  logic run, dyn_valid, dyn_ready, q_empty, q_full, q_pop, inj_on, inj_empty, inj_valid;
  logic ev_static, ev_dynamic, push, we;
  am_t  dyn_am, dyn_next, q_head, inj_am, din;
  logic [2:0] cda, csa, waddr;
  cfg_t cd, cs, wdata;
  logic [6:0] qc;
  int checks = 0, failures = 0;

  config_memory u_cfg (.clk, .rst_n, .we, .waddr, .wdata, .raddr_a(cda), .rdata_a(cd),
                       .raddr_b(csa), .rdata_b(cs));
  am_queue u_q (.clk, .rst_n, .push, .din, .pop(q_pop), .dout(q_head), .empty(q_empty),
                .full(q_full), .count(qc));
  am_ni dut (.run, .dyn_valid, .dyn_am, .dyn_ready, .dyn_next, .q_empty, .q_head, .q_pop,
             .cfg_dyn_addr(cda), .cfg_dyn(cd), .cfg_st_addr(csa), .cfg_st(cs),
             .inj_on, .inj_empty, .inj_valid, .inj_am, .ev_static, .ev_dynamic);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  function automatic cfg_t cfgv(int npc, opcode_e op, logic a, logic b, logic c);
    cfg_t x; x.n_pc = 4'(npc); x.opcode = op; x.res_c = a; x.op1_c = b; x.op2_c = c; return x;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    am_t e;
    run = 0; dyn_valid = 0; dyn_am = '0; inj_on = 1; inj_empty = 1; push = 0; we = 0;
    din = '0; waddr = 0; wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      we = 1; waddr = 3'(i); wdata = cfgv(i + 1, opcode_e'(3'(i)), i[0], i[1], i[2]); @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 3; i++) begin
      push = 1; din = '0; din.r1 = 4'(i + 1); din.op1 = 16'(1000 + i); @(negedge clk);
    end
    push = 0;
    #1;
    chk(!inj_valid, "no static AM while run is low");
    run = 1; #1;
    chk(inj_valid && q_pop && inj_am.op1 == 16'd1000 && inj_am.cfg == cfgv(1, OP_LOAD, 0, 0, 0), "static AM = head + entry 0");
    inj_empty = 0; #1;
    chk(!inj_valid && !q_pop, "static waits for an empty buffer");
    inj_empty = 1;
    dyn_valid = 1; dyn_am = '0; dyn_am.cfg.n_pc = 4'd5; dyn_am.op1 = 16'd77; #1;
    chk(inj_valid && !q_pop && inj_am.op1 == 16'd77 && inj_am.cfg == cfgv(6, OP_DIV, 1, 0, 1), "dynamic AM gets entry N_PC");
    chk(dyn_ready && ev_dynamic, "dynamic accepted");
    chk(dyn_next.cfg == cfgv(6, OP_DIV, 1, 0, 1) && dyn_next.op1 == 16'd77, "loopback copy configured");
    inj_on = 0; #1;
    chk(!inj_valid && !dyn_ready, "OFF blocks injection");
    inj_on = 1; dyn_valid = 0;
    @(negedge clk);
    chk(inj_valid && inj_am.op1 == 16'd1001, "next static AM in order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
