// scanner: bit-vector sparse metadata scanner.
//
// Loads a VLEN-element (128) occupancy bit vector and returns the
// coordinates (bit positions) of its set bits, lowest first, one per cycle:
// coord_valid/coord with coord_last on the final one, advancing when
// coord_ready is high. A new vector is accepted (load) when the scanner is not
// busy. Any number of non-zeros, up to all VLEN, is handled. The published
// design integrates such a scanner with the off-chip bus controller to turn
// compressed bit vectors into coordinates; its internal organisation is not
// published, and this one is a priority encoder over the remaining bits.
module scanner #(
  parameter int unsigned VLEN = 128,
  localparam int unsigned CW  = $clog2(VLEN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [VLEN-1:0] vec,
  output logic            busy,
  output logic            coord_valid,
  output logic [CW-1:0]   coord,
  output logic            coord_last,
  input  logic            coord_ready
);
  logic [VLEN-1:0] rem, lowest;

  // Isolate the lowest set bit and encode it.
  assign lowest = rem & (~rem + 1'b1);
  always_comb begin
    coord = '0;
    for (int i = 0; i < int'(VLEN); i++) begin
      if (lowest[i]) coord = CW'(i);
    end
  end

  assign busy        = (rem != '0);
  assign coord_valid = busy;
  assign coord_last  = busy && ((rem & ~lowest) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0;
    end else if (load && !busy) begin
      rem <= vec;
    end else if (coord_valid && coord_ready) begin
      rem <= rem & ~lowest;
    end
  end
endmodule
