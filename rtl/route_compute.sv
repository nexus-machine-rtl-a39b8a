// route_compute: route computation unit of a router.
//
// For each of the five input ports whose buffer head is valid, compares the
// message's current destination R1 with this PE's position and produces a
// request vector over the five output ports (bit 0 local, then N, E, S, W).
//
// Routing is minimal and follows the west-first turn model: a message whose
// destination lies to the west may only go west; otherwise every productive
// direction among N, E, S is requested and the allocator, which sees the
// downstream On/Off state, picks one (congestion-aware adaptivity). A message
// at its destination requests the local port.
//
// Opportunistic execution: a message that could run without memory
// (can_enroute) and that did not come from this PE's own injection port
// requests only the local port when this PE's compute unit is idle, so it
// executes on the first idle PE on its route. The choice of west-first and
// the id layout (id = row*COLS + col, row 0 north) are this design's.
// Purely combinational.
module route_compute
  import nm_pkg::*;
#(
  parameter int unsigned COLS = 4,
  parameter int unsigned ROWS = 4
) (
  input  logic [NPORT-1:0]            valid,
  input  logic [NPORT-1:0][ID_W-1:0]  dest,
  input  logic [NPORT-1:0]            can_enroute,
  input  logic                        pe_idle,
  input  logic [ID_W-1:0]             my_id,
  output logic [NPORT-1:0][NPORT-1:0] req,      // req[input][output]
  output logic [NPORT-1:0]            capture   // request is an en-route capture
);
  int unsigned mx, my, dx, dy;

  always_comb begin
    mx = int'(my_id) % COLS;
    my = int'(my_id) / COLS;
    for (int i = 0; i < int'(NPORT); i++) begin
      req[i]     = '0;
      capture[i] = 1'b0;
      dx = int'(dest[i]) % COLS;
      dy = int'(dest[i]) / COLS;
      if (valid[i]) begin
        if (dest[i] == my_id) begin
          req[i][P_L] = 1'b1;
        end else if (can_enroute[i] && pe_idle && (i != int'(P_L))) begin
          req[i][P_L] = 1'b1;
          capture[i]  = 1'b1;
        end else if (dx < mx) begin
          req[i][P_W] = 1'b1;
        end else begin
          if (dx > mx) req[i][P_E] = 1'b1;
          if (dy < my) req[i][P_N] = 1'b1;
          if (dy > my) req[i][P_S] = 1'b1;
        end
      end
    end
  end

  // every destination must lie inside the array
  always_comb begin
    for (int i = 0; i < int'(NPORT); i++)
      a_dest_in_array: assert (!valid[i] || int'(dest[i]) < int'(COLS * ROWS));
  end
endmodule
