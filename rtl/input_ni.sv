// input_ni: input network interface and execution control of a PE.
//
// Takes one active message at a time from the router's local output
// (in_valid/in_ready; in_ready doubles as the local output's On signal) and
// executes it with the PE's decode unit and ALU:
//   LOAD    - every operand flagged as an address (Op1_c/Op2_c = 0) is read
//             from the data memory and replaced by its value.
//   STREAM  - Count (the Op2 field) words are read from base address Op1;
//             one message is emitted per word, with Op1 = the word and
//             Result = Result + k, so consecutive results land in
//             consecutive words at the next destination.
//   ALU op, Res_c = 1 - address operands are read first, then the ALU result
//             replaces Op1 and the message is emitted.
//   ALU op, Res_c = 0 - a final message: mem[Result] := mem[Result] op Op1
//             (Op1 read first if it is an address); nothing is emitted.
// An emitted message whose next destination (after the AM network interface
// has applied its configuration) is this PE itself is not sent through the
// router but taken back at once (loop_valid/loop_am): otherwise the PE could
// wait on its own injection buffer, which waits on the PE. This loopback is
// this design's addition; the published PE always injects.
// After a message has used this PE's memory at its destination R1, the
// destination list is rotated (R2 first, R3 second). Emitted messages go to
// the AM network interface (out_valid/out_ready), which applies the next
// configuration selected by their N_PC field.
// "idle" tells the router that the compute unit can take an en-route
// message. The operation set follows the published PE; the exact semantics
// of the flags, the stream fields and the final update are this design's.
// A message takes 2 cycles for a pure ALU operation plus 2 per memory read.
module input_ni
  import nm_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ID_W-1:0]   my_id,
  input  logic              in_valid,
  input  am_t               in_am,
  output logic              in_ready,
  output logic              out_valid,
  output am_t               out_am,
  input  logic              out_ready,
  // the emitted AM after configuration, when it is addressed to this PE
  input  logic              loop_valid,
  input  am_t               loop_am,
  output logic              emitting,   // holding a finished AM for output
  output logic              idle,
  // events for performance counters
  output logic              ev_exec,      // a message started executing
  output logic              ev_final,     // a final result was written
  output logic              ev_stream,    // a streaming load started
  // host port to the data memory
  input  logic              h_en,
  input  logic              h_we,
  input  logic [AW-1:0]     h_addr,
  input  logic [DATA_W-1:0] h_wdata,
  output logic [DATA_W-1:0] h_rdata
);
  typedef enum logic [2:0] {
    S_IDLE, S_RD1, S_RD2, S_RDR, S_EXEC, S_WR, S_EMIT, S_STREAM
  } state_e;

  state_e            state, state_n;
  am_t               am;
  logic              mem_used, issued;
  logic [DATA_W-1:0] old_res, alu_a, alu_b, alu_y;

  // decode unit connections
  logic              du_valid, du_ready, du_evalid, du_eready, du_busy;
  du_mode_e          du_mode;
  logic [DATA_W-1:0] du_base, du_count, du_wdata, du_elem, du_eidx;

  decode_unit #(.DEPTH(DEPTH)) u_du (
    .clk, .rst_n,
    .cmd_valid(du_valid), .cmd_ready(du_ready), .cmd_mode(du_mode),
    .cmd_base(du_base), .cmd_count(du_count), .cmd_wdata(du_wdata),
    .elem_valid(du_evalid), .elem(du_elem), .elem_idx(du_eidx),
    .elem_last(), .elem_ready(du_eready), .busy(du_busy),
    .h_en, .h_we, .h_addr, .h_wdata, .h_rdata
  );

  // Final messages combine with the stored value: mem[Result] op Op1.
  assign alu_a = am.cfg.res_c ? am.op1 : old_res;
  assign alu_b = am.cfg.res_c ? am.op2 : am.op1;

  alu #(.W(DATA_W)) u_alu (.op(am.cfg.opcode), .a(alu_a), .b(alu_b), .y(alu_y));

  logic take;
  am_t  new_am;
  // A message is taken from the router when idle, or straight from this PE's
  // own output when that output is addressed to this PE (loopback).
  assign in_ready = (state == S_IDLE);
  assign idle     = (state == S_IDLE);
  assign emitting = (state == S_EMIT);
  assign take     = (in_valid && in_ready) || (state == S_EMIT && loop_valid);
  assign new_am   = (state == S_EMIT) ? loop_am : in_am;
  assign ev_exec  = take;
  assign ev_final = (state == S_WR) && du_ready;
  assign ev_stream = (state == S_STREAM) && !issued && du_ready;

  // Next state once Op1 is a value; rd2 says Op2 still has to be read.
  function automatic state_e after_reads(opcode_e op, logic res_c, logic rd2);
    if (rd2)                     return S_RD2;
    if (is_alu_op(op) && !res_c) return S_RDR;
    if (is_alu_op(op))           return S_EXEC;
    return S_EMIT;
  endfunction

  always_comb begin
    du_valid  = 1'b0;
    du_mode   = DU_DEREF;
    du_base   = am.op1;
    du_count  = am.op2;
    du_wdata  = alu_y;
    du_eready = 1'b0;
    out_valid = 1'b0;
    out_am    = mem_used && (am.r1 == my_id) ? rotate_dest(am) : am;
    state_n   = state;
    unique case (state)
      S_IDLE, S_EMIT: begin
        if (state == S_EMIT) out_valid = !loop_valid;
        if (take) begin
          if (new_am.cfg.opcode == OP_STREAM) state_n = S_STREAM;
          else if (!new_am.cfg.op1_c)         state_n = S_RD1;
          else state_n = after_reads(new_am.cfg.opcode, new_am.cfg.res_c, !new_am.cfg.op2_c);
        end else if (state == S_EMIT && out_ready) begin
          state_n = S_IDLE;
        end
      end
      S_RD1, S_RD2, S_RDR: begin
        du_mode   = DU_DEREF;
        du_base   = (state == S_RD1) ? am.op1 : (state == S_RD2) ? am.op2 : am.result;
        du_valid  = !issued;
        du_eready = 1'b1;
        if (du_evalid) begin
          unique case (state)
            S_RD1:   state_n = after_reads(am.cfg.opcode, am.cfg.res_c, !am.cfg.op2_c);
            S_RD2:   state_n = after_reads(am.cfg.opcode, am.cfg.res_c, 1'b0);
            default: state_n = S_WR;
          endcase
        end
      end
      S_EXEC: state_n = S_EMIT;
      S_WR: begin
        du_mode  = DU_WRITE;
        du_base  = am.result;
        du_valid = 1'b1;
        if (du_ready) state_n = S_IDLE;
      end
      S_STREAM: begin
        du_mode   = DU_STREAM;
        du_valid  = !issued;
        out_valid = du_evalid;
        out_am    = rotate_dest(am);
        out_am.op1    = du_elem;
        out_am.result = am.result + du_eidx;
        du_eready = out_ready;
        if (issued && !du_busy) state_n = S_IDLE;
      end
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      am       <= '0;
      mem_used <= 1'b0;
      issued   <= 1'b0;
      old_res  <= '0;
    end else begin
      state <= state_n;
      if (du_valid && du_ready) issued <= 1'b1;
      if (state_n != state)     issued <= 1'b0;
      unique case (state)
        S_IDLE, S_EMIT: if (take) begin
          am       <= new_am;
          mem_used <= (new_am.cfg.opcode == OP_STREAM) || !new_am.cfg.op1_c || !new_am.cfg.op2_c;
        end
        S_RD1: if (du_evalid) begin am.op1 <= du_elem; am.cfg.op1_c <= 1'b1; end
        S_RD2: if (du_evalid) begin am.op2 <= du_elem; am.cfg.op2_c <= 1'b1; end
        S_RDR: if (du_evalid) old_res <= du_elem;
        S_EXEC: if (am.cfg.res_c) am.op1 <= alu_y;
        default: ;
      endcase
    end
  end
endmodule
