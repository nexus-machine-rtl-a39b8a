// am_ni: active message network interface of a PE.
//
// Builds every message the PE injects into its router's local input buffer:
//  (1) when the input network interface offers an output dynamic AM, its
//      configuration part is replaced by configuration entry N_PC (the next
//      instruction of the task) and it is injected;
//  (2) otherwise, while run is high, a static AM is built from the head of
//      the AM queue with its configuration part replaced by entry 0 (the
//      first instruction) and injected, which keeps the network busy.
// Injection waits for the router buffer's On signal, so the backpressure
// sets the static AM rate. A static AM is only injected while inj_empty is
// high; the PE drives it high only when the PE is idle and its router holds
// no message, which keeps room for dynamic AMs (this design's guard against
// protocol deadlock). dyn_next is the offered dynamic AM with its next
// configuration already applied; the PE uses it to decide on loopback.
// Combinational; the configuration memory and AM queue are outside.
module am_ni
  import nm_pkg::*;
#(
  parameter int unsigned CFG_ENTRIES = 8,
  localparam int unsigned CAW        = $clog2(CFG_ENTRIES)
) (
  input  logic           run,
  // output dynamic AM from the input network interface
  input  logic           dyn_valid,
  input  am_t            dyn_am,
  output logic           dyn_ready,
  // AM queue head
  input  logic           q_empty,
  input  am_t            q_head,
  output logic           q_pop,
  // configuration memory
  output logic [CAW-1:0] cfg_dyn_addr,
  input  cfg_t           cfg_dyn,
  output logic [CAW-1:0] cfg_st_addr,
  input  cfg_t           cfg_st,
  // router local input
  input  logic           inj_on,
  input  logic           inj_empty,
  output logic           inj_valid,
  output am_t            inj_am,
  output am_t            dyn_next,   // dyn_am with its next configuration
  output logic           ev_static,
  output logic           ev_dynamic
);
  assign cfg_dyn_addr = dyn_am.cfg.n_pc[CAW-1:0];
  assign cfg_st_addr  = '0;

  always_comb begin
    dyn_next     = dyn_am;
    dyn_next.cfg = cfg_dyn;
  end

  always_comb begin
    dyn_ready = inj_on;
    q_pop     = 1'b0;
    inj_valid = 1'b0;
    inj_am    = dyn_am;
    inj_am.cfg = cfg_dyn;
    if (dyn_valid) begin
      inj_valid = inj_on;
    end else if (run && !q_empty && inj_on && inj_empty) begin
      inj_valid  = 1'b1;
      q_pop      = 1'b1;
      inj_am     = q_head;
      inj_am.cfg = cfg_st;
    end
  end

  assign ev_static  = q_pop;
  assign ev_dynamic = dyn_valid && inj_on;
endmodule
