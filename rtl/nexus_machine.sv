// nexus_machine: top level of the Nexus Machine reconfigurable fabric.
//
// A ROWS x COLS (4 x 4) mesh of PEs that execute active messages: each
// message carries its destinations, its instruction and its operands, and is
// executed where its data lives or, opportunistically, on the first idle PE
// on its route. PE ids are row*COLS + col, row 0 at the north edge.
//
// Off-chip memory reaches the array at its west edge: one AXI4 read port and
// loader per row (axi_loader, with its bit-vector scanner) fills the AM
// queues and data memories of the PEs of that row. The configuration port
// writes the same configuration entry into every PE. A global termination
// detector raises done and a one-cycle irq when, with run high, no PE or
// loader is busy and no message is buffered anywhere.
//
// Usage: load configurations, data memories and AM queues; raise run; wait
// for irq; read results with host_rd_* (data one cycle after host_rd_en);
// drop run. Loading AM queues may continue while running. The ev_* outputs
// are per-PE one-cycle event pulses for performance counters.
module nexus_machine
  import nm_pkg::*;
#(
  parameter int unsigned COLS      = 4,
  parameter int unsigned ROWS      = 4,
  parameter int unsigned AMQ_DEPTH = 117,
  parameter int unsigned DM_DEPTH  = 512,
  parameter int unsigned AXI_DW    = 128,
  localparam int unsigned NPE      = COLS * ROWS,
  localparam int unsigned DAW      = $clog2(DM_DEPTH),
  localparam int unsigned CLW      = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned BW       = $clog2(16 + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         run,
  // configuration broadcast
  input  logic                         cfg_we,
  input  logic [2:0]                   cfg_addr,
  input  cfg_t                         cfg_wdata,
  // load commands, one per row
  input  logic       [ROWS-1:0]        ld_cmd_valid,
  output logic       [ROWS-1:0]        ld_cmd_ready,
  input  ld_target_e [ROWS-1:0]        ld_cmd_target,
  input  logic       [ROWS-1:0][CLW-1:0] ld_cmd_col,
  input  logic       [ROWS-1:0][DAW-1:0] ld_cmd_dst,
  input  logic       [ROWS-1:0][31:0]  ld_cmd_addr,
  input  logic       [ROWS-1:0][BW-1:0] ld_cmd_beats,
  // AXI4 read ports, one per row
  output logic       [ROWS-1:0]        m_arvalid,
  input  logic       [ROWS-1:0]        m_arready,
  output logic       [ROWS-1:0][31:0]  m_araddr,
  output logic       [ROWS-1:0][7:0]   m_arlen,
  output logic       [ROWS-1:0][2:0]   m_arsize,
  output logic       [ROWS-1:0][1:0]   m_arburst,
  output logic       [ROWS-1:0][3:0]   m_arid,
  input  logic       [ROWS-1:0]        m_rvalid,
  output logic       [ROWS-1:0]        m_rready,
  input  logic       [ROWS-1:0][AXI_DW-1:0] m_rdata,
  input  logic       [ROWS-1:0][1:0]   m_rresp,
  input  logic       [ROWS-1:0]        m_rlast,
  input  logic       [ROWS-1:0][3:0]   m_rid,
  // host read of data memories
  input  logic                         host_rd_en,
  input  logic [ID_W-1:0]              host_rd_pe,
  input  logic [DAW-1:0]               host_rd_addr,
  output logic [DATA_W-1:0]            host_rd_data,
  // completion
  output logic                         done,
  output logic                         irq,
  // per-PE events
  output logic [NPE-1:0]               ev_enroute,
  output logic [NPE-1:0]               ev_exec,
  output logic [NPE-1:0]               ev_final,
  output logic [NPE-1:0]               ev_stream,
  output logic [NPE-1:0]               ev_static,
  output logic [NPE-1:0]               ev_dynamic,
  output logic [NPE-1:0]               ev_off
);
  // mesh link signals, indexed by PE and direction (0 N, 1 E, 2 S, 3 W)
  logic [NPE-1:0][3:0] l_in_valid, l_in_on, l_out_valid, l_out_on;
  am_t  [NPE-1:0][3:0] l_in_msg, l_out_msg;
  logic [NPE-1:0]      pe_busy, amq_full;
  logic [NPE-1:0][DATA_W-1:0] rd_data;
  logic [ROWS-1:0]     ld_busy;
  logic [ROWS-1:0][CLW-1:0] ld_col;
  logic [ROWS-1:0]     ld_amq_push, ld_dm_we, ld_amq_full;
  am_t  [ROWS-1:0]     ld_amq_din;
  logic [ROWS-1:0][DAW-1:0]    ld_dm_addr;
  logic [ROWS-1:0][DATA_W-1:0] ld_dm_wdata;
  logic [ID_W-1:0]     rd_pe_q;

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    axi_loader #(.DW(AXI_DW), .DM_DEPTH(DM_DEPTH), .COLS(COLS)) u_ld (
      .clk, .rst_n,
      .cmd_valid(ld_cmd_valid[r]), .cmd_ready(ld_cmd_ready[r]),
      .cmd_target(ld_cmd_target[r]), .cmd_col(ld_cmd_col[r]), .cmd_dst(ld_cmd_dst[r]),
      .cmd_addr(ld_cmd_addr[r]), .cmd_beats(ld_cmd_beats[r]),
      .arvalid(m_arvalid[r]), .arready(m_arready[r]), .araddr(m_araddr[r]),
      .arlen(m_arlen[r]), .arsize(m_arsize[r]), .arburst(m_arburst[r]), .arid(m_arid[r]),
      .rvalid(m_rvalid[r]), .rready(m_rready[r]), .rdata(m_rdata[r]), .rresp(m_rresp[r]),
      .rlast(m_rlast[r]), .rid(m_rid[r]),
      .ld_col(ld_col[r]), .amq_push(ld_amq_push[r]), .amq_din(ld_amq_din[r]),
      .amq_full(ld_amq_full[r]), .dm_we(ld_dm_we[r]), .dm_addr(ld_dm_addr[r]),
      .dm_wdata(ld_dm_wdata[r]), .busy(ld_busy[r])
    );
    assign ld_amq_full[r] = amq_full[r*COLS + int'(ld_col[r])];

    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      localparam int unsigned ID = r * COLS + c;
      logic sel;
      assign sel = (ld_col[r] == CLW'(c));

      // North link
      if (r > 0) begin : g_n
        assign l_in_valid[ID][0] = l_out_valid[ID-COLS][2];
        assign l_in_msg[ID][0]   = l_out_msg[ID-COLS][2];
        assign l_out_on[ID][0]   = l_in_on[ID-COLS][2];
      end else begin : g_n_edge
        assign l_in_valid[ID][0] = 1'b0;
        assign l_in_msg[ID][0]   = '0;
        assign l_out_on[ID][0]   = 1'b0;
      end
      // South link
      if (r < int'(ROWS) - 1) begin : g_s
        assign l_in_valid[ID][2] = l_out_valid[ID+COLS][0];
        assign l_in_msg[ID][2]   = l_out_msg[ID+COLS][0];
        assign l_out_on[ID][2]   = l_in_on[ID+COLS][0];
      end else begin : g_s_edge
        assign l_in_valid[ID][2] = 1'b0;
        assign l_in_msg[ID][2]   = '0;
        assign l_out_on[ID][2]   = 1'b0;
      end
      // East link
      if (c < int'(COLS) - 1) begin : g_e
        assign l_in_valid[ID][1] = l_out_valid[ID+1][3];
        assign l_in_msg[ID][1]   = l_out_msg[ID+1][3];
        assign l_out_on[ID][1]   = l_in_on[ID+1][3];
      end else begin : g_e_edge
        assign l_in_valid[ID][1] = 1'b0;
        assign l_in_msg[ID][1]   = '0;
        assign l_out_on[ID][1]   = 1'b0;
      end
      // West link
      if (c > 0) begin : g_w
        assign l_in_valid[ID][3] = l_out_valid[ID-1][1];
        assign l_in_msg[ID][3]   = l_out_msg[ID-1][1];
        assign l_out_on[ID][3]   = l_in_on[ID-1][1];
      end else begin : g_w_edge
        assign l_in_valid[ID][3] = 1'b0;
        assign l_in_msg[ID][3]   = '0;
        assign l_out_on[ID][3]   = 1'b0;
      end

      pe #(.COLS(COLS), .ROWS(ROWS), .AMQ_DEPTH(AMQ_DEPTH), .DM_DEPTH(DM_DEPTH)) u_pe (
        .clk, .rst_n, .my_id(ID_W'(ID)), .run,
        .link_in_valid(l_in_valid[ID]), .link_in_msg(l_in_msg[ID]), .link_in_on(l_in_on[ID]),
        .link_out_valid(l_out_valid[ID]), .link_out_msg(l_out_msg[ID]), .link_out_on(l_out_on[ID]),
        .amq_push(ld_amq_push[r] && sel), .amq_din(ld_amq_din[r]), .amq_full(amq_full[ID]),
        .dm_we(ld_dm_we[r] && sel), .dm_addr(ld_dm_addr[r]), .dm_wdata(ld_dm_wdata[r]),
        .cfg_we, .cfg_addr, .cfg_wdata,
        .rd_en(host_rd_en && host_rd_pe == ID_W'(ID)), .rd_addr(host_rd_addr), .rd_data(rd_data[ID]),
        .busy(pe_busy[ID]),
        .ev_enroute(ev_enroute[ID]), .ev_exec(ev_exec[ID]), .ev_final(ev_final[ID]),
        .ev_stream(ev_stream[ID]), .ev_static(ev_static[ID]), .ev_dynamic(ev_dynamic[ID]),
        .ev_off(ev_off[ID])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          rd_pe_q <= '0;
    else if (host_rd_en) rd_pe_q <= host_rd_pe;
  end
  assign host_rd_data = rd_data[rd_pe_q];

  term_detect #(.NPE(NPE)) u_term (
    .clk, .rst_n, .run, .pe_busy, .ext_busy(|ld_busy), .done, .irq
  );
endmodule
