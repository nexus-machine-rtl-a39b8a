// sep_allocator: separable switch allocator with congestion control.
//
// Three steps in one cycle, in the order the published allocator uses:
//  1. first stage: every output (resource) picks one of the inputs
//     (requestors) that request it, round-robin from the input after the one
//     it last granted;
//  2. congestion control: outputs whose downstream buffer signals OFF are
//     removed;
//  3. second stage: every input keeps one of the outputs it won, the lowest
//     numbered (local port first).
// The result gnt[i][o] has at most one bit per row and per column. The
// round-robin pointer of an output moves only when that output is used.
module sep_allocator
  import nm_pkg::*;
#(
  parameter int unsigned N = NPORT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0][N-1:0] req,     // req[input][output]
  input  logic [N-1:0]        out_on,  // downstream On/Off per output
  output logic [N-1:0][N-1:0] gnt      // gnt[input][output]
);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  logic [N-1:0][PW-1:0] ptr;
  logic [N-1:0][N-1:0]  s1, s2;
  logic [N-1:0]         used;
  int unsigned          k;

  always_comb begin
    // First stage: per output, round-robin over inputs.
    s1 = '0;
    for (int o = 0; o < int'(N); o++) begin
      logic found;
      found = 1'b0;
      for (int n = 1; n <= int'(N); n++) begin
        k = (int'(ptr[o]) + n) % N;
        if (!found && req[k][o]) begin
          s1[k][o] = 1'b1;
          found    = 1'b1;
        end
      end
    end
    // Congestion control.
    for (int i = 0; i < int'(N); i++) s2[i] = s1[i] & out_on;
    // Second stage: per input, lowest numbered output.
    gnt = '0;
    for (int i = 0; i < int'(N); i++) begin
      logic found;
      found = 1'b0;
      for (int o = 0; o < int'(N); o++) begin
        if (!found && s2[i][o]) begin
          gnt[i][o] = 1'b1;
          found     = 1'b1;
        end
      end
    end
    for (int o = 0; o < int'(N); o++) begin
      used[o] = 1'b0;
      for (int i = 0; i < int'(N); i++) used[o] = used[o] | gnt[i][o];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '{default: PW'(N - 1)};
    end else begin
      for (int o = 0; o < int'(N); o++) begin
        for (int i = 0; i < int'(N); i++) begin
          if (gnt[i][o]) ptr[o] <= PW'(i);
        end
      end
    end
  end

  a_one_per_output: assert property (@(posedge clk) disable iff (!rst_n)
    $countones(gnt) <= N)
    else $error("sep_allocator: too many grants");
endmodule
