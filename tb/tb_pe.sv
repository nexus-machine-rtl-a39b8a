// tb_pe: one PE (id 5, row 1 col 1) with its mesh links driven by the
// testbench. Runs a three-instruction task on the PE's own data
// (LOAD -> MUL -> final ADD, the SpMV chain), checks the accumulated word;
// checks that a static AM for another PE leaves on the right link with
// configuration entry 0; and that an ALU message passing through the idle PE
// is executed en-route and continues toward its destination.
module tb_pe;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1, run;
  logic [3:0] lin_valid, lin_on, lout_valid, lout_on;
  am_t  [3:0] lin_msg, lout_msg;
  logic amq_push, amq_full, dm_we, cfg_we, rd_en, busy;
  logic ev_enroute, ev_exec, ev_final, ev_stream, ev_static, ev_dynamic, ev_off;
  am_t  amq_din;
  logic [8:0] dm_addr, rd_addr;
  logic [15:0] dm_wdata, rd_data;
  logic [2:0] cfg_addr;
  cfg_t cfg_wdata;
  int checks = 0, failures = 0, n_enroute = 0, n_final = 0;

  pe dut (.clk, .rst_n, .my_id(4'd5), .run,
    .link_in_valid(lin_valid), .link_in_msg(lin_msg), .link_in_on(lin_on),
    .link_out_valid(lout_valid), .link_out_msg(lout_msg), .link_out_on(lout_on),
    .amq_push, .amq_din, .amq_full, .dm_we, .dm_addr, .dm_wdata,
    .cfg_we, .cfg_addr, .cfg_wdata, .rd_en, .rd_addr, .rd_data, .busy,
    .ev_enroute, .ev_exec, .ev_final, .ev_stream, .ev_static, .ev_dynamic, .ev_off);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires
  always @(posedge clk) begin
    if (ev_enroute) n_enroute++;
    if (ev_final) n_final++;
  end

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  function automatic cfg_t cfgv(int npc, opcode_e op, logic a, logic b, logic c);
    cfg_t x; x.n_pc = 4'(npc); x.opcode = op; x.res_c = a; x.op1_c = b; x.op2_c = c; return x;
  endfunction

  task automatic wmem(int a, int d);
    dm_we = 1; dm_addr = 9'(a); dm_wdata = 16'(d); @(negedge clk); dm_we = 0;
  endtask

  task automatic rmem(int a, output int d);
    rd_en = 1; rd_addr = 9'(a); @(negedge clk); rd_en = 0; d = int'(rd_data);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, t;
    am_t m;
    run = 0; lin_valid = 0; lin_msg = '0; lout_on = '1; amq_push = 0; amq_din = '0;
    dm_we = 0; dm_addr = 0; dm_wdata = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = '0;
    rd_en = 0; rd_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    cfg_we = 1;
    cfg_addr = 0; cfg_wdata = cfgv(1, OP_LOAD, 1, 1, 0); @(negedge clk);
    cfg_addr = 1; cfg_wdata = cfgv(2, OP_MUL, 1, 1, 1); @(negedge clk);
    cfg_addr = 2; cfg_wdata = cfgv(0, OP_ADD, 0, 1, 1); @(negedge clk);
    cfg_we = 0;
    wmem(20, 6); wmem(100, 1);
    m = '0; m.r1 = 4'd5; m.r2 = 4'd5; m.op1 = 16'd7; m.op2 = 16'd20; m.result = 16'd100;
    amq_push = 1; amq_din = m; @(negedge clk); amq_push = 0;
    run = 1;
    t = 0;
    while ((busy || t < 2) && t < 200) begin @(negedge clk); t++; end
    run = 0;
    chk(n_final == 1, "one final update");
    rmem(100, d);
    chk(d == 43, $sformatf("mem[100] = 1 + 7*6, got %0d", d));
    chk(lout_valid == 0, "nothing left the PE");
    // static AM to PE 6 (east)
    m = '0; m.r1 = 4'd6; m.op1 = 16'd99;
    amq_push = 1; amq_din = m; @(negedge clk); amq_push = 0;
    run = 1;
    t = 0;
    while (!lout_valid[1] && t < 20) begin @(negedge clk); t++; end
    chk(lout_valid[1] && lout_msg[1].op1 == 16'd99 && lout_msg[1].cfg == cfgv(1, OP_LOAD, 1, 1, 0), "static AM leaves east");
    @(negedge clk);
    run = 0;
    // en-route: from the north link toward PE 13, MUL 9*5, next config = final ADD
    m = '0; m.r1 = 4'd13; m.op1 = 16'd9; m.op2 = 16'd5; m.result = 16'd3;
    m.cfg = cfgv(2, OP_MUL, 1, 1, 1);
    lin_valid[0] = 1; lin_msg[0] = m; @(negedge clk); lin_valid = 0;
    t = 0;
    while (!lout_valid[2] && t < 20) begin @(negedge clk); t++; end
    chk(n_enroute == 1, "executed en-route");
    chk(lout_valid[2] && lout_msg[2].op1 == 16'd45 && lout_msg[2].r1 == 4'd13 &&
        lout_msg[2].cfg == cfgv(0, OP_ADD, 0, 1, 1), "continues south with result and next config");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
