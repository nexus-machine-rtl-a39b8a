// tb_input_ni: execution of active messages at PE 5 with a preloaded data
// memory (word i holds 5*i+2). Checks LOAD (address operand replaced by the
// word, destinations rotated), an en-route ALU message (result in Op1, no
// rotation, emitted two cycles after it was accepted), an ALU message with an
// address operand, a final ADD that accumulates into memory, and a STREAM that
// emits one message per word with Result incremented.
module tb_input_ni;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1;
  logic in_valid, in_ready, out_valid, out_ready, idle, ev_exec, ev_final, ev_stream;
  logic loop_valid, emitting;
  am_t  loop_am;
  am_t  in_am, out_am;
  logic h_en, h_we;
  logic [8:0] h_addr;
  logic [15:0] h_wdata, h_rdata;
  int checks = 0, failures = 0;

  input_ni dut (.clk, .rst_n, .my_id(4'd5), .in_valid, .in_am, .in_ready, .out_valid, .out_am,
    .loop_valid, .loop_am, .emitting,
    .out_ready, .idle, .ev_exec, .ev_final, .ev_stream, .h_en, .h_we, .h_addr, .h_wdata, .h_rdata);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  function automatic am_t mk(int r1, int r2, int r3, opcode_e op, logic rc, logic c1, logic c2,
                             int res, int o1, int o2);
    am_t m;
    m.r1 = 4'(r1); m.r2 = 4'(r2); m.r3 = 4'(r3);
    m.cfg.n_pc = 4'd3; m.cfg.opcode = op; m.cfg.res_c = rc; m.cfg.op1_c = c1; m.cfg.op2_c = c2;
    m.result = 16'(res); m.op1 = 16'(o1); m.op2 = 16'(o2);
    return m;
  endfunction

  // send one message, return the cycles until the first output (or until idle)
  task automatic send(am_t m, output int lat);
    while (!in_ready) @(negedge clk);
    in_valid = 1; in_am = m;
    @(negedge clk); in_valid = 0;
    lat = 1;
    while (!out_valid && !idle && lat < 100) begin @(negedge clk); lat++; end
  endtask

  function automatic int mem(int a); return 5 * a + 2; endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, n;
    loop_valid = 0; loop_am = '0;
    in_valid = 0; in_am = '0; out_ready = 1; h_en = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 512; i++) begin
      h_en = 1; h_we = 1; h_addr = 9'(i); h_wdata = 16'(mem(i)); @(negedge clk);
    end
    h_en = 0; h_we = 0;
    // LOAD: Op1 value 11, Op2 address 40
    send(mk(5, 9, 1, OP_LOAD, 1, 1, 0, 60, 11, 40), lat);
    chk(out_valid && out_am.op2 == 16'(mem(40)) && out_am.op1 == 16'd11, "LOAD value");
    chk(out_am.r1 == 4'd9 && out_am.r2 == 4'd1 && out_am.r3 == 4'd5, "LOAD rotates");
    chk(out_am.cfg.n_pc == 4'd3, "N_PC kept for the AM NI");
    @(negedge clk);
    // en-route MUL (destination elsewhere)
    send(mk(9, 1, 5, OP_MUL, 1, 1, 1, 60, 11, 13), lat);
    chk(out_valid && out_am.op1 == 16'd143, "MUL result in Op1");
    chk(out_am.r1 == 4'd9, "no rotation en-route");
    chk(lat == 2, $sformatf("ALU latency %0d", lat));
    @(negedge clk);
    // MUL with address Op2 at destination
    send(mk(5, 2, 3, OP_MUL, 1, 1, 0, 0, 3, 7), lat);
    chk(out_valid && out_am.op1 == 16'(3 * mem(7)), "MUL with dereference");
    chk(out_am.r1 == 4'd2, "rotation after memory use");
    @(negedge clk);
    // final ADD: mem[60] += 143, twice
    send(mk(5, 0, 0, OP_ADD, 0, 1, 1, 60, 143, 0), lat);
    chk(!out_valid, "final emits nothing");
    send(mk(5, 0, 0, OP_ADD, 0, 1, 1, 60, 143, 0), lat);
    repeat (3) @(negedge clk);
    h_en = 1; h_addr = 9'd60; @(negedge clk); h_en = 0;
    chk(h_rdata == 16'(mem(60) + 286), $sformatf("accumulated %0d", h_rdata));
    // STREAM: base 10, count 4, result 300, with one stall
    while (!in_ready) @(negedge clk);
    in_valid = 1; in_am = mk(5, 6, 7, OP_STREAM, 1, 0, 1, 300, 10, 4);
    @(negedge clk); in_valid = 0;
    n = 0;
    for (int t = 0; t < 40; t++) begin
      out_ready = (t != 4);
      #1;
      if (out_valid && out_ready) begin
        chk(out_am.op1 == 16'(mem(10 + n)) && out_am.result == 16'(300 + n), "stream element");
        chk(out_am.r1 == 4'd6, "stream rotates");
        n++;
      end
      @(negedge clk);
    end
    chk(n == 4 && idle, $sformatf("stream count %0d", n));
    // loopback: a finished MUL whose next step is for this PE is taken back
    // without being offered to the router; its final ADD lands in mem[70]
    out_ready = 0;
    send(mk(9, 1, 5, OP_MUL, 1, 1, 1, 70, 5, 6), lat);
    chk(emitting && out_valid, "holding the MUL result");
    loop_valid = 1; loop_am = out_am; loop_am.r1 = 4'd5;
    loop_am.cfg.opcode = OP_ADD; loop_am.cfg.res_c = 1'b0; #1;
    chk(!out_valid && ev_exec, "loopback replaces output");
    @(negedge clk); loop_valid = 0; out_ready = 1;
    chk(!emitting, "loopback AM being executed");
    repeat (6) @(negedge clk);
    h_en = 1; h_addr = 9'd70; @(negedge clk); h_en = 0;
    chk(idle && h_rdata == 16'(mem(70) + 30), $sformatf("loopback result %0d", h_rdata));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
