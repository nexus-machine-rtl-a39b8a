// pe: one processing element of the Nexus Machine fabric.
//
// Contains the router, the AM network interface with its AM queue and
// configuration memory, and the input network interface with the compute
// unit (ALU) and decode unit (with the 1 KB data memory). Messages leave the
// AM network interface into the router's local input buffer; messages for
// this PE (arrived at R1, or captured for en-route execution while the PE is
// idle) leave the router's local output into the input network interface.
//
// Mesh links use index 0 N, 1 E, 2 S, 3 W. link_out_* goes to the neighbour
// in that direction; link_in_on is this PE's On/Off to the neighbour,
// link_out_on the neighbour's On/Off to this PE. Unused links at the array
// edge are tied off by the top. The load port (amq_*, dm_*), configuration
// port (cfg_*) and read port (rd_*) are used by the off-chip loader and the
// host; the read port returns data one cycle after rd_en and, like data
// memory loads, is meant for use between runs. "busy" is high while the PE
// holds or executes a message or still has static AMs to send.
//
// Deadlock guard (this design's choice): the paper leaves PE-network protocol
// deadlock to the compiler and to runtime timeouts. Here two rules keep the
// fabric from locking up when every injection buffer is full of messages
// waiting for busy PEs: (1) a finished AM whose next destination is this PE
// goes straight back into the input network interface (loopback, see
// input_ni), and (2) a static AM from the queue is released only when this
// PE is idle and its router holds no message at all, so new work enters the
// mesh only where there is room. Dynamic AMs are never held back.
module pe
  import nm_pkg::*;
#(
  parameter int unsigned COLS      = 4,
  parameter int unsigned ROWS      = 4,
  parameter int unsigned AMQ_DEPTH = 117,
  parameter int unsigned DM_DEPTH  = 512,
  parameter int unsigned CFG_ENTRIES = 8,
  localparam int unsigned DAW      = $clog2(DM_DEPTH),
  localparam int unsigned CAW      = $clog2(CFG_ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ID_W-1:0]   my_id,
  input  logic              run,
  // mesh links
  input  logic [3:0]        link_in_valid,
  input  am_t  [3:0]        link_in_msg,
  output logic [3:0]        link_in_on,
  output logic [3:0]        link_out_valid,
  output am_t  [3:0]        link_out_msg,
  input  logic [3:0]        link_out_on,
  // loading
  input  logic              amq_push,
  input  am_t               amq_din,
  output logic              amq_full,
  input  logic              dm_we,
  input  logic [DAW-1:0]    dm_addr,
  input  logic [DATA_W-1:0] dm_wdata,
  input  logic              cfg_we,
  input  logic [CAW-1:0]    cfg_addr,
  input  cfg_t              cfg_wdata,
  input  logic              rd_en,
  input  logic [DAW-1:0]    rd_addr,
  output logic [DATA_W-1:0] rd_data,
  // status and events
  output logic              busy,
  output logic              ev_enroute,
  output logic              ev_exec,
  output logic              ev_final,
  output logic              ev_stream,
  output logic              ev_static,
  output logic              ev_dynamic,
  output logic              ev_off
);
  logic [NPORT-1:0] r_in_valid, r_in_on, r_out_valid, r_out_on;
  am_t  [NPORT-1:0] r_in_msg, r_out_msg;
  logic             pe_idle, r_empty, st_gate;
  logic             ni_in_ready;
  logic             dyn_valid, dyn_ready, q_empty, q_pop, loop_valid, emitting;
  am_t              dyn_am, dyn_next, q_head, inj_am;
  logic             inj_valid;
  logic [CAW-1:0]   cfg_dyn_addr, cfg_st_addr;
  cfg_t             cfg_dyn, cfg_st;

  // Router wiring: port 0 local, ports 1..4 = links 0..3.
  assign r_in_valid[P_L] = inj_valid;
  assign r_in_msg[P_L]   = inj_am;
  assign r_out_on[P_L]   = ni_in_ready;
  for (genvar d = 0; d < 4; d++) begin : g_link
    assign r_in_valid[d+1]   = link_in_valid[d];
    assign r_in_msg[d+1]     = link_in_msg[d];
    assign link_in_on[d]     = r_in_on[d+1];
    assign link_out_valid[d] = r_out_valid[d+1];
    assign link_out_msg[d]   = r_out_msg[d+1];
    assign r_out_on[d+1]     = link_out_on[d];
  end

  router #(.COLS(COLS), .ROWS(ROWS)) u_router (
    .clk, .rst_n, .my_id, .pe_idle,
    .in_valid(r_in_valid), .in_msg(r_in_msg), .in_on(r_in_on),
    .out_valid(r_out_valid), .out_msg(r_out_msg), .out_on(r_out_on),
    .enroute_fire(ev_enroute), .empty(r_empty), .inj_empty()
  );

  input_ni #(.DEPTH(DM_DEPTH)) u_ini (
    .clk, .rst_n, .my_id,
    .in_valid(r_out_valid[P_L]), .in_am(r_out_msg[P_L]), .in_ready(ni_in_ready),
    .out_valid(dyn_valid), .out_am(dyn_am), .out_ready(dyn_ready),
    .loop_valid, .loop_am(dyn_next), .emitting,
    .idle(pe_idle), .ev_exec, .ev_final, .ev_stream,
    .h_en(dm_we || rd_en), .h_we(dm_we), .h_addr(dm_we ? dm_addr : rd_addr),
    .h_wdata(dm_wdata), .h_rdata(rd_data)
  );

  am_queue #(.DEPTH(AMQ_DEPTH), .W($bits(am_t))) u_amq (
    .clk, .rst_n, .push(amq_push), .din(amq_din), .pop(q_pop), .dout(q_head),
    .empty(q_empty), .full(amq_full), .count()
  );

  config_memory #(.ENTRIES(CFG_ENTRIES)) u_cfg (
    .clk, .rst_n, .we(cfg_we), .waddr(cfg_addr), .wdata(cfg_wdata),
    .raddr_a(cfg_dyn_addr), .rdata_a(cfg_dyn), .raddr_b(cfg_st_addr), .rdata_b(cfg_st)
  );

  am_ni #(.CFG_ENTRIES(CFG_ENTRIES)) u_amni (
    .run, .dyn_valid, .dyn_am, .dyn_ready, .dyn_next,
    .q_empty, .q_head, .q_pop,
    .cfg_dyn_addr, .cfg_dyn, .cfg_st_addr, .cfg_st,
    .inj_on(r_in_on[P_L]), .inj_empty(st_gate), .inj_valid, .inj_am,
    .ev_static, .ev_dynamic
  );

  // Static AMs are only released when this PE and its router are quiet (see
  // the deadlock note in the header).
  assign st_gate = r_empty && pe_idle;

  // Loopback: the next AM is for this PE itself (see input_ni).
  assign loop_valid = emitting && (dyn_next.r1 == my_id);

  assign busy   = !pe_idle || !r_empty || (run && !q_empty);
  assign ev_off = ~&r_in_on;
endmodule
