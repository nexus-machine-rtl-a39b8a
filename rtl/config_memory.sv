// config_memory: per-PE configuration memory, 8 entries of 10 bits.
//
// Each entry is the configuration part of an active message: {N_PC, Opcode,
// Res_c, Op1_c, Op2_c}. Entry 0 configures the static AMs built from the AM
// queue; after a PE executes an AM, entry N_PC of that AM configures the AM it
// emits, so N_PC chains the instructions of a task. Two read ports (one for
// the dynamic path, one for static AMs) are combinational; the write port is
// used by the host before execution. Reset clears the entries.
module config_memory
  import nm_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  cfg_t          wdata,
  input  logic [AW-1:0] raddr_a,
  output cfg_t          rdata_a,
  input  logic [AW-1:0] raddr_b,
  output cfg_t          rdata_b
);
  cfg_t mem [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(ENTRIES); i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule
