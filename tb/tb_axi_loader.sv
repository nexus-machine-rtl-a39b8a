// tb_axi_loader: the row loader against an AXI4 memory model. Loads three
// static AMs into column 2's AM queue (with the queue reporting full for a
// while), sixteen data words from two beats into column 1 at word 40, and a
// two-beat bit vector through the scanner, whose coordinates must come out
// as beat*128 + bit. Checks the AXI burst fields and every write.
module tb_axi_loader;
  import nm_pkg::*;
  logic clk = 0, rst_n = 1;
  logic cmd_valid, cmd_ready, arvalid, arready, rvalid, rready, rlast, busy;
  ld_target_e cmd_target;
  logic [1:0] cmd_col, ld_col, rresp, arburst;
  logic [8:0] cmd_dst, dm_addr;
  logic [31:0] cmd_addr, araddr, w_word;
  logic [4:0] cmd_beats;
  logic [7:0] arlen;
  logic [2:0] arsize;
  logic [3:0] arid;
  logic [127:0] rdata, w_data;
  logic amq_push, amq_full, dm_we, w_en;
  am_t amq_din;
  logic [15:0] dm_wdata;
  int checks = 0, failures = 0;
  am_t q [$];
  int  wa [$], wd [$];

  axi_loader dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_target, .cmd_col, .cmd_dst,
    .cmd_addr, .cmd_beats, .arvalid, .arready, .araddr, .arlen, .arsize, .arburst, .arid,
    .rvalid, .rready, .rdata, .rresp, .rlast, .rid(4'd0), .ld_col, .amq_push, .amq_din,
    .amq_full, .dm_we, .dm_addr, .dm_wdata, .busy);
  axi_mem_model mem (.clk, .rst_n, .w_en, .w_word, .w_data, .arvalid, .arready, .araddr, .arlen,
    .rvalid, .rready, .rdata, .rresp, .rlast);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  always @(posedge clk) begin
    if (amq_push) begin q.push_back(amq_din); end
    if (dm_we) begin wa.push_back(int'(dm_addr)); wd.push_back(int'(dm_wdata)); end
    if (arvalid && arready) begin
      checks++;
      if (arsize != 3'd4 || arburst != 2'b01) begin failures++; $display("FAIL AR fields"); end
    end
  end

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  task automatic cmd(ld_target_e tg, int col, int dst, int addr, int beats);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_target = tg; cmd_col = 2'(col); cmd_dst = 9'(dst);
    cmd_addr = 32'(addr); cmd_beats = 5'(beats);
    @(negedge clk); cmd_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] v0, v1;
    int exp [$];
    cmd_valid = 0; cmd_target = LD_AMQ; cmd_col = 0; cmd_dst = 0; cmd_addr = 0; cmd_beats = 1;
    amq_full = 0; w_en = 0; w_word = 0; w_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      w_en = 1; w_word = 32'(i); w_data = {58'd0, 70'(i * 1111 + 5)}; @(negedge clk);
    end
    for (int i = 0; i < 2; i++) begin
      w_en = 1; w_word = 32'(10 + i);
      for (int k = 0; k < 8; k++) w_data[k*16 +: 16] = 16'(100 * i + k);
      @(negedge clk);
    end
    v0 = '0; v0[0] = 1; v0[5] = 1; v0[127] = 1;
    v1 = '0; v1[3] = 1; v1[64] = 1;
    w_en = 1; w_word = 20; w_data = v0; @(negedge clk);
    w_en = 1; w_word = 21; w_data = v1; @(negedge clk);
    w_en = 0;
    // AM queue load with a full queue for some cycles
    fork
      begin amq_full = 1; repeat (12) @(negedge clk); amq_full = 0; end
      cmd(LD_AMQ, 2, 0, 0, 3);
    join
    chk(q.size() == 3, "three AMs pushed");
    for (int i = 0; i < 3 && i < q.size(); i++) chk(q[i] == am_t'(70'(i * 1111 + 5)), "AM content");
    chk(ld_col == 2'd2, "column");
    // data memory load
    cmd(LD_DMEM, 1, 40, 10 * 16, 2);
    chk(wa.size() == 16, $sformatf("16 words, got %0d", wa.size()));
    for (int i = 0; i < 16 && i < wa.size(); i++)
      chk(wa[i] == 40 + i && wd[i] == 100 * (i / 8) + (i % 8), "word");
    wa.delete(); wd.delete();
    // scan load
    cmd(LD_SCAN, 3, 200, 20 * 16, 2);
    exp = '{0, 5, 127, 128 + 3, 128 + 64};
    chk(wa.size() == 5, $sformatf("5 coordinates, got %0d", wa.size()));
    for (int i = 0; i < 5 && i < wa.size(); i++)
      chk(wa[i] == 200 + i && wd[i] == exp[i], $sformatf("coord %0d = %0d", i, wd[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
