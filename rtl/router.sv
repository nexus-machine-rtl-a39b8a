// router: five-port dynamic, congestion-aware mesh router.
//
// Port 0 is local: its input is the injection buffer fed by the PE's AM
// network interface, its output feeds the PE's input network interface.
// Ports 1..4 connect to the N, E, S and W neighbours. Each input port has a
// three-register buffer with On/Off flow control (router_inbuf); the head
// message of every buffer goes through route computation (route_compute),
// the separable allocator (sep_allocator) and the crossbar in the same cycle,
// so a message moves one hop per cycle when it wins. An output may be used
// only when its downstream "on" (out_on) is high; for the local output that
// is the input network interface's ready.
//
// The head message's R1 field is its destination. A message whose route
// computation chose en-route execution at this PE is counted on
// enroute_fire. All of this follows the published router; the cycle timing
// and the allocator policies are this design's.
module router
  import nm_pkg::*;
#(
  parameter int unsigned COLS = 4,
  parameter int unsigned ROWS = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ID_W-1:0]     my_id,
  input  logic                pe_idle,
  input  logic [NPORT-1:0]    in_valid,
  input  am_t  [NPORT-1:0]    in_msg,
  output logic [NPORT-1:0]    in_on,      // BP_upstream
  output logic [NPORT-1:0]    out_valid,
  output am_t  [NPORT-1:0]    out_msg,
  input  logic [NPORT-1:0]    out_on,     // BP_downstream
  output logic                enroute_fire,
  output logic                empty,      // no message buffered
  output logic                inj_empty   // local input buffer empty
);
  logic [NPORT-1:0]            hv, pop, eok, cap;
  am_t  [NPORT-1:0]            head;
  logic [NPORT-1:0][ID_W-1:0]  dest;
  logic [NPORT-1:0][NPORT-1:0] req, gnt, sel;

  for (genvar p = 0; p < int'(NPORT); p++) begin : g_in
    router_inbuf u_buf (
      .clk, .rst_n,
      .push (in_valid[p]),
      .din  (in_msg[p]),
      .pop  (pop[p]),
      .valid(hv[p]),
      .dout (head[p]),
      .on   (in_on[p]),
      .count()
    );
    assign dest[p] = head[p].r1;
    assign eok[p]  = enroute_ok(head[p]);
  end

  route_compute #(.COLS(COLS), .ROWS(ROWS)) u_rc (
    .valid(hv), .dest, .can_enroute(eok), .pe_idle, .my_id, .req, .capture(cap)
  );

  sep_allocator #(.N(NPORT)) u_alloc (
    .clk, .rst_n, .req, .out_on, .gnt
  );

  always_comb begin
    enroute_fire = 1'b0;
    for (int i = 0; i < int'(NPORT); i++) begin
      pop[i] = |gnt[i];
      if (cap[i] && gnt[i][P_L]) enroute_fire = 1'b1;
      for (int o = 0; o < int'(NPORT); o++) sel[o][i] = gnt[i][o];
    end
  end

  assign empty     = ~|hv;
  assign inj_empty = !hv[P_L];

  crossbar #(.N(NPORT)) u_xbar (
    .in_msg(head), .sel, .out_valid, .out_msg
  );
endmodule
