// tb_route_compute: for every position in the 4x4 mesh and every
// destination, checks the west-first request set (only W when the
// destination is west, otherwise every productive direction among N/E/S,
// local at the destination) and the en-route capture rule: captured to the
// local port only when allowed, the PE is idle and the message did not come
// from the local injection port.
module tb_route_compute;
  import nm_pkg::*;
  logic [4:0]        valid, can_enroute, capture;
  logic [4:0][3:0]   dest;
  logic              pe_idle;
  logic [3:0]        my_id;
  logic [4:0][4:0]   req;
  int checks = 0, failures = 0, captures = 0;

  route_compute dut (.valid, .dest, .can_enroute, .pe_idle, .my_id, .req, .capture);

  function automatic logic [4:0] expect_req(int me, int d, logic eok, logic idle, int port);
    logic [4:0] e;
    int mx, my, dx, dy;
    e = '0;
    mx = me % 4; my = me / 4; dx = d % 4; dy = d / 4;
    if (d == me) e[0] = 1;
    else if (eok && idle && port != 0) e[0] = 1;
    else if (dx < mx) e[4] = 1;
    else begin
      if (dx > mx) e[2] = 1;
      if (dy < my) e[1] = 1;
      if (dy > my) e[3] = 1;
    end
    return e;
  endfunction

  initial begin
    for (int me = 0; me < 16; me++)
      for (int d = 0; d < 16; d++)
        for (int k = 0; k < 4; k++) begin
          my_id = 4'(me); pe_idle = k[0];
          can_enroute = {5{k[1]}};
          valid = 5'b11111;
          for (int p = 0; p < 5; p++) dest[p] = 4'(d);
          #1;
          for (int p = 0; p < 5; p++) begin
            checks++;
            if (req[p] !== expect_req(me, d, k[1], k[0], p)) begin
              failures++;
              $display("FAIL me=%0d d=%0d k=%0d p=%0d req=%b", me, d, k, p, req[p]);
            end
            if (capture[p]) captures++;
          end
        end
    valid = '0; #1; checks++;
    if (req !== '0) begin failures++; $display("FAIL no valid"); end
    checks++;
    if (captures == 0) begin failures++; $display("FAIL no capture"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
