// data_memory: per-PE 1 KB data memory, 512 words of 16 bits.
//
// Single-port synchronous memory: when en is high a write stores wdata at
// addr, a read returns mem[addr] on rdata after the next clock edge. The
// published design uses a compiled SRAM macro here; this is the same
// function written as an array, with the ports such a macro has. Contents are
// not reset (a macro is not); the host loads them before use.
module data_memory #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
