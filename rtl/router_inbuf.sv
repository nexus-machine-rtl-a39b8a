// router_inbuf: one router input buffer, three message registers with On/Off
// flow control.
//
// A FIFO of DEPTH (3) messages. The "on" output goes to the upstream sender:
// it turns OFF when the free space falls to T_OFF (1) and back ON when the
// free space reaches T_ON (2). "on" is a register, so the upstream sees it one
// cycle late; the one slot left at OFF absorbs the message that may already
// be on its way. Depth and thresholds follow the published router; the
// registered signal is this design's timing. Pushing into a full buffer is an
// assertion failure.
module router_inbuf
  import nm_pkg::*;
#(
  parameter int unsigned DEPTH = 3,
  parameter int unsigned T_OFF = 1,
  parameter int unsigned T_ON  = 2,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  am_t  din,
  input  logic pop,
  output logic valid,
  output am_t  dout,
  output logic on,
  output logic [CW-1:0] count
);
  am_t           regs [DEPTH];
  logic [CW-1:0] free_n;
  logic          do_pop;

  assign valid  = (count != '0);
  assign dout   = regs[0];
  assign do_pop = pop && valid;

  // Free space after this cycle's push/pop.
  assign free_n = CW'(DEPTH) - (count + CW'(push) - CW'(do_pop));

  // Shift-register FIFO: entry 0 is the head.
  always_ff @(posedge clk) begin
    for (int i = 0; i < int'(DEPTH); i++) begin
      if (do_pop) begin
        if (push && (CW'(i) == count - 1'b1)) regs[i] <= din;
        else if (i < int'(DEPTH) - 1)         regs[i] <= regs[i+1];
      end else if (push && (CW'(i) == count)) begin
        regs[i] <= din;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      on    <= 1'b1;
    end else begin
      count <= count + CW'(push) - CW'(do_pop);
      if (free_n <= CW'(T_OFF))     on <= 1'b0;
      else if (free_n >= CW'(T_ON)) on <= 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (count < CW'(DEPTH)) || do_pop)
    else $error("router_inbuf: message arrived at a full buffer");
endmodule
