// tb_nexus_machine: end-to-end test of the whole fabric at its default size
// (4x4 PEs, 117-entry AM queues, 512-word data memories, 128-bit AXI).
//
// Tile 1 - SpMV, out = M * vec, with a random irregular 64x64 sparse matrix
// (row lengths 0..40). vec[j] lives in PE j%16 at word j/16, out[i] in PE
// i%16 at word 256 + i/16. Every non-zero M[i][j] becomes one static AM in
// the queue of PE i%16: R1 = PE of vec[j], R2 = PE of out[i], Op1 = M[i][j],
// Op2 = address of vec[j], Result = address of out[i]. The configuration
// chains LOAD (fetch vec[j]) -> MUL (anywhere, en-route if possible) -> final
// ADD into out[i]. Everything reaches the PEs through the four row loaders
// and AXI memory models; a bit vector is also loaded through a scanner.
// Tile 2 - streaming: each PE p streams its 4 output words to PE (p+5)%16,
// where they are accumulated into words 300..303 (a row merge).
// After each tile the testbench waits for the interrupt, reads every result
// through the host port and compares with values computed here. It also
// counts each mechanism (en-route execution, On/Off backpressure, static and
// dynamic injection, final updates, streaming, scanner coordinates,
// interrupts) and counts a failure for any that never happened.
module tb_nexus_machine;
  import nm_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 1, run;
  logic cfg_we;
  logic [2:0] cfg_addr;
  cfg_t cfg_wdata;
  logic       [3:0] ld_cmd_valid, ld_cmd_ready;
  ld_target_e [3:0] ld_cmd_target;
  logic [3:0][1:0] ld_cmd_col;
  logic [3:0][8:0] ld_cmd_dst;
  logic [3:0][31:0] ld_cmd_addr, m_araddr;
  logic [3:0][4:0] ld_cmd_beats;
  logic [3:0] m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [3:0][7:0] m_arlen;
  logic [3:0][2:0] m_arsize;
  logic [3:0][1:0] m_arburst, m_rresp;
  logic [3:0][3:0] m_arid;
  logic [3:0][127:0] m_rdata;
  logic host_rd_en, done, irq;
  logic [3:0] host_rd_pe;
  logic [8:0] host_rd_addr;
  logic [15:0] host_rd_data;
  logic [15:0] ev_enroute, ev_exec, ev_final, ev_stream, ev_static, ev_dynamic, ev_off;
  logic [3:0] w_en;
  logic [31:0] w_word;
  logic [127:0] w_data;

  int checks = 0, failures = 0;
  int n_enroute = 0, n_exec = 0, n_final = 0, n_stream = 0, n_static = 0, n_dyn = 0, n_off = 0, n_irq = 0;
  int cyc = 0;

  nexus_machine dut (.clk, .rst_n, .run, .cfg_we, .cfg_addr, .cfg_wdata,
    .ld_cmd_valid, .ld_cmd_ready, .ld_cmd_target, .ld_cmd_col, .ld_cmd_dst, .ld_cmd_addr,
    .ld_cmd_beats, .m_arvalid, .m_arready, .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arid,
    .m_rvalid, .m_rready, .m_rdata, .m_rresp, .m_rlast, .m_rid('0),
    .host_rd_en, .host_rd_pe, .host_rd_addr, .host_rd_data, .done, .irq,
    .ev_enroute, .ev_exec, .ev_final, .ev_stream, .ev_static, .ev_dynamic, .ev_off);

  for (genvar r = 0; r < 4; r++) begin : g_mem
    axi_mem_model #(.DEPTH(1024)) u_mem (.clk, .rst_n, .w_en(w_en[r]), .w_word, .w_data,
      .arvalid(m_arvalid[r]), .arready(m_arready[r]), .araddr(m_araddr[r]), .arlen(m_arlen[r]),
      .rvalid(m_rvalid[r]), .rready(m_rready[r]), .rdata(m_rdata[r]), .rresp(m_rresp[r]),
      .rlast(m_rlast[r]));
  end

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // a falling edge, so the asynchronous reset fires

  always @(posedge clk) begin
    cyc++;
    n_enroute += $countones(ev_enroute);
    n_exec    += $countones(ev_exec);
    n_final   += $countones(ev_final);
    n_stream  += $countones(ev_stream);
    n_static  += $countones(ev_static);
    n_dyn     += $countones(ev_dynamic);
    n_off     += $countones(ev_off);
    if (irq) n_irq++;
  end

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", m, $time); end
  endtask

  function automatic cfg_t cfgv(int npc, opcode_e op, logic a, logic b, logic c);
    cfg_t x; x.n_pc = 4'(npc); x.opcode = op; x.res_c = a; x.op1_c = b; x.op2_c = c; return x;
  endfunction

  task automatic set_cfg(int a, cfg_t v);
    cfg_we = 1; cfg_addr = 3'(a); cfg_wdata = v; @(negedge clk); cfg_we = 0;
  endtask

  task automatic put_word(int row, int word, logic [127:0] d);
    w_en = '0; w_en[row] = 1; w_word = 32'(word); w_data = d; @(negedge clk); w_en = '0;
  endtask

  task automatic load(int row, ld_target_e tg, int col, int dst, int word, int beats);
    while (!ld_cmd_ready[row]) @(negedge clk);
    ld_cmd_valid[row] = 1; ld_cmd_target[row] = tg; ld_cmd_col[row] = 2'(col);
    ld_cmd_dst[row] = 9'(dst); ld_cmd_addr[row] = 32'(word * 16); ld_cmd_beats[row] = 5'(beats);
    @(negedge clk); ld_cmd_valid[row] = 0;
    @(negedge clk);
    while (!ld_cmd_ready[row]) @(negedge clk);
  endtask

  task automatic rd(int pe, int a, output int d);
    host_rd_en = 1; host_rd_pe = 4'(pe); host_rd_addr = 9'(a); @(negedge clk);
    host_rd_en = 0; d = int'(host_rd_data);
  endtask

  task automatic run_tile(output int cycles);
    int irq0;
    irq0 = n_irq;
    run = 1; cycles = 0;
    while (n_irq == irq0 && cycles < 200000) begin @(negedge clk); cycles++; end
    chk(n_irq == irq0 + 1, "tile finished with an interrupt");
    run = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // test data
  logic [15:0] M [N][N];
  logic [15:0] vec [N];
  logic [15:0] outv [N];
  am_t ams [16][$];

  initial begin
    int d, cycles, nnz, len, word;
    logic [127:0] beat, sv;
    int exp_coord [$];
    run = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = '0;
    ld_cmd_valid = '0; ld_cmd_target = '{default: LD_AMQ}; ld_cmd_col = '0; ld_cmd_dst = '0;
    ld_cmd_addr = '0; ld_cmd_beats = '0; host_rd_en = 0; host_rd_pe = 0; host_rd_addr = 0;
    w_en = '0; w_word = 0; w_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);

    // ---- build the SpMV problem ----
    nnz = 0;
    for (int j = 0; j < N; j++) vec[j] = 16'($urandom % 50);
    for (int i = 0; i < N; i++) begin
      // irregular rows: a few long ones, many short or empty
      len = (i % 7 == 0) ? 30 + $urandom % 11 : $urandom % 12;
      for (int j = 0; j < N; j++) M[i][j] = 0;
      for (int k = 0; k < len; k++) M[i][$urandom % N] = 16'(1 + $urandom % 20);
      outv[i] = 0;
      for (int j = 0; j < N; j++) begin
        if (M[i][j] != 0) begin
          am_t m;
          m = '0;
          m.r1 = 4'(j % 16); m.r2 = 4'(i % 16); m.r3 = 4'(i % 16);
          m.op1 = M[i][j]; m.op2 = 16'(j / 16); m.result = 16'(256 + i / 16);
          ams[i % 16].push_back(m);
          outv[i] = outv[i] + M[i][j] * vec[j];
          nnz++;
        end
      end
    end
    for (int p = 0; p < 16; p++) chk(ams[p].size() <= 117, "AM queue capacity");
    $display("SpMV %0dx%0d, %0d non-zeros", N, N, nnz);

    // ---- off-chip memory images, per row ----
    for (int p = 0; p < 16; p++) begin
      int r, c;
      r = p / 4; c = p % 4;
      for (int k = 0; k < ams[p].size(); k++) put_word(r, c * 128 + k, 128'(ams[p][k]));
      beat = '0;
      for (int k = 0; k < 4; k++) beat[k*16 +: 16] = vec[p + 16 * k];
      put_word(r, 600 + c, beat);
    end
    for (int r = 0; r < 4; r++) put_word(r, 610, '0);
    sv = '0; sv[2] = 1; sv[77] = 1; sv[126] = 1;
    put_word(0, 620, sv);
    for (int i = 0; i < 128; i++) if (sv[i]) exp_coord.push_back(i);

    // ---- configuration: LOAD -> MUL -> final ADD ----
    set_cfg(0, cfgv(1, OP_LOAD, 1, 1, 0));
    set_cfg(1, cfgv(2, OP_MUL, 1, 1, 1));
    set_cfg(2, cfgv(0, OP_ADD, 0, 1, 1));

    // ---- loads through the AXI loaders ----
    for (int p = 0; p < 16; p++) begin
      int r, c;
      r = p / 4; c = p % 4;
      load(r, LD_DMEM, c, 0, 600 + c, 1);        // vec words 0..3 (+4 zero words)
      load(r, LD_DMEM, c, 256, 610, 1);          // out words 256..263 = 0
      load(r, LD_DMEM, c, 300, 610, 1);          // tile 2 accumulators 300..307 = 0
      word = 0;
      while (word < ams[p].size()) begin
        len = (ams[p].size() - word > 16) ? 16 : ams[p].size() - word;
        load(r, LD_AMQ, c, 0, c * 128 + word, len);
        word += len;
      end
    end
    load(0, LD_SCAN, 1, 400, 620, 1);            // coordinates into PE 1 words 400..

    // ---- tile 1 ----
    run_tile(cycles);
    $display("SpMV tile: %0d cycles, %0d en-route of %0d executions", cycles, n_enroute, n_exec);
    for (int i = 0; i < N; i++) begin
      rd(i % 16, 256 + i / 16, d);
      chk(d == int'(outv[i]), $sformatf("out[%0d] = %0d, expected %0d", i, d, outv[i]));
    end
    for (int k = 0; k < exp_coord.size(); k++) begin
      rd(1, 400 + k, d);
      chk(d == exp_coord[k], $sformatf("scanned coordinate %0d = %0d", k, d));
    end

    // ---- tile 2: streaming row merge ----
    set_cfg(0, cfgv(3, OP_STREAM, 1, 0, 1));
    set_cfg(3, cfgv(0, OP_ADD, 0, 1, 1));
    for (int p = 0; p < 16; p++) begin
      am_t m;
      m = '0;
      m.r1 = 4'(p); m.r2 = 4'((p + 5) % 16); m.r3 = 4'(p);
      m.op1 = 16'd256; m.op2 = 16'd4; m.result = 16'd300;
      put_word(p / 4, 700 + p % 4, 128'(m));
      load(p / 4, LD_AMQ, p % 4, 0, 700 + p % 4, 1);
    end
    run_tile(cycles);
    $display("stream tile: %0d cycles", cycles);
    for (int q = 0; q < 16; q++) begin
      int p;
      p = (q + 16 - 5) % 16;
      for (int k = 0; k < 4; k++) begin
        rd(q, 300 + k, d);
        chk(d == int'(outv[p + 16 * k]), $sformatf("merged word PE%0d[%0d] = %0d", q, k, d));
      end
    end

    // ---- mechanisms ----
    $display("events: enroute=%0d exec=%0d final=%0d stream=%0d static=%0d dynamic=%0d off=%0d irq=%0d",
             n_enroute, n_exec, n_final, n_stream, n_static, n_dyn, n_off, n_irq);
    chk(n_enroute > 0, "en-route execution happened");
    chk(n_off > 0, "On/Off backpressure happened");
    chk(n_static == nnz + 16, "every static AM injected once");
    chk(n_dyn > 0, "dynamic AMs injected");
    chk(n_final == nnz + 64, "one final update per product and streamed word");
    chk(n_stream == 16, "streaming loads");
    chk(n_irq == 2, "two interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
