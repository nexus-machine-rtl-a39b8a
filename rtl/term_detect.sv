// term_detect: global termination detector.
//
// While run is high, watches the busy line of every PE (a message held,
// being executed or buffered in its router, or static AMs left to send) and
// of the off-chip loaders. When all are quiet for two consecutive cycles the
// fabric has finished: done goes high and irq pulses for one cycle to tell
// the host. done falls again as soon as anything becomes busy or run is
// dropped. The published design only states that a global idle signal is
// generated and raised to the host as an interrupt; the two-cycle margin is
// this design's choice.
module term_detect #(
  parameter int unsigned NPE = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run,
  input  logic [NPE-1:0] pe_busy,
  input  logic           ext_busy,
  output logic           done,
  output logic           irq
);
  logic quiet, quiet_q;

  assign quiet = run && !(|pe_busy) && !ext_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      quiet_q <= 1'b0;
      done    <= 1'b0;
      irq     <= 1'b0;
    end else begin
      quiet_q <= quiet;
      done    <= quiet && quiet_q;
      irq     <= quiet && quiet_q && !done;
    end
  end
endmodule
