// crossbar: the router's switch, five inputs by five outputs.
//
// Combinational. sel[o] is a one-hot choice of the input that drives output
// o this cycle (from the allocator); an output with no selected input is not
// valid. The published text calls it a 6x5 crossbar while describing five
// input ports; this design has exactly the five input buffers of the router.
module crossbar
  import nm_pkg::*;
#(
  parameter int unsigned N = NPORT
) (
  input  am_t  [N-1:0]        in_msg,
  input  logic [N-1:0][N-1:0] sel,       // sel[output][input]
  output logic [N-1:0]        out_valid,
  output am_t  [N-1:0]        out_msg
);
  always_comb begin
    for (int o = 0; o < int'(N); o++) begin
      out_valid[o] = |sel[o];
      out_msg[o]   = '0;
      for (int i = 0; i < int'(N); i++) begin
        if (sel[o][i]) out_msg[o] = out_msg[o] | in_msg[i];
      end
    end
  end
endmodule
