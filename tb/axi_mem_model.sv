// axi_mem_model: behavioural model of an off-chip memory with an AXI4 read
// port (read address and read data channels only), for testbenches.
// Holds DEPTH words of DW bits at byte address word*DW/8; the testbench fills
// it through the w_* port. Accepts one burst at a time (INCR), answers after
// LATENCY cycles, and, when GAPS is set, leaves random idle cycles between
// beats. Not synthesizable logic of the design; it stands for a DRAM.
module axi_mem_model #(
  parameter int unsigned DW      = 128,
  parameter int unsigned DEPTH   = 256,
  parameter int unsigned LATENCY = 4,
  parameter bit          GAPS    = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_en,
  input  logic [31:0]   w_word,
  input  logic [DW-1:0] w_data,
  input  logic          arvalid,
  output logic          arready,
  input  logic [31:0]   araddr,
  input  logic [7:0]    arlen,
  output logic          rvalid,
  input  logic          rready,
  output logic [DW-1:0] rdata,
  output logic [1:0]    rresp,
  output logic          rlast
);
  logic [DW-1:0] mem [DEPTH];
  int unsigned   word, left, wait_cnt;
  logic          active;

  assign arready = !active;
  assign rresp   = 2'b00;
  assign rdata   = mem[word % DEPTH];
  assign rlast   = rvalid && (left == 0);

  always_ff @(posedge clk) if (w_en) mem[w_word % DEPTH] <= w_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; rvalid <= 1'b0; word <= 0; left <= 0; wait_cnt <= 0;
    end else begin
      if (arvalid && arready) begin
        active   <= 1'b1;
        word     <= araddr / (DW / 8);
        left     <= arlen;
        wait_cnt <= LATENCY;
      end else if (active) begin
        if (rvalid && rready) begin
          rvalid <= 1'b0;
          if (left == 0) active <= 1'b0;
          else begin
            word     <= word + 1;
            left     <= left - 1;
            wait_cnt <= GAPS ? ($urandom % 3) : 0;
          end
        end else if (!rvalid) begin
          if (wait_cnt == 0) rvalid <= 1'b1;
          else wait_cnt <= wait_cnt - 1;
        end
      end
    end
  end
endmodule
