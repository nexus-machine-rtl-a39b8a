// nm_pkg: types and constants shared by the Nexus Machine RTL.
//
// The central type is the 70-bit active message (AM). Every message in the
// fabric is a single flit of this format:
//
//   R1 R2 R3 | N_PC Opcode Res_c Op1_c Op2_c | Result Op1 Op2
//   4  4  4  |  4     3     1     1     1    |  16    16  16   = 70 bits
//
// R1..R3 are PE ids of the destinations still to visit; R1 is the current
// one. The ten middle bits are the "configuration" part: they are replaced
// from the configuration memory each time a PE produces a new AM. Res_c=1
// marks an AM that still carries a result forward; Res_c=0 marks a final AM
// whose Result field is the address where the result is accumulated.
// Op1_c/Op2_c=1 mean the operand field holds a value, 0 an address.
// Field names and widths follow the published message format; the order of
// fields inside the word (R1 most significant) and the opcode encoding are
// this design's choices.
package nm_pkg;

  localparam int unsigned AM_W    = 70;
  localparam int unsigned DATA_W  = 16;
  localparam int unsigned ID_W    = 4;
  localparam int unsigned PC_W    = 4;
  localparam int unsigned CFG_W   = 10;
  localparam int unsigned NPORT   = 5;

  // Router port numbering: 0 is the local port (injection from the AM
  // network interface / ejection to the input network interface).
  localparam int unsigned P_L = 0;
  localparam int unsigned P_N = 1;
  localparam int unsigned P_E = 2;
  localparam int unsigned P_S = 3;
  localparam int unsigned P_W = 4;

  typedef enum logic [2:0] {
    OP_LOAD   = 3'd0,  // dereference address operands (decode unit)
    OP_STREAM = 3'd1,  // stream Count elements from base address Op1
    OP_ADD    = 3'd2,
    OP_SUB    = 3'd3,
    OP_MUL    = 3'd4,
    OP_DIV    = 3'd5,
    OP_AND    = 3'd6,
    OP_MIN    = 3'd7
  } opcode_e;

  // Configuration word: the blue fields of the message.
  typedef struct packed {
    logic [PC_W-1:0] n_pc;
    opcode_e         opcode;
    logic            res_c;
    logic            op1_c;
    logic            op2_c;
  } cfg_t;

  typedef struct packed {
    logic [ID_W-1:0]   r1;
    logic [ID_W-1:0]   r2;
    logic [ID_W-1:0]   r3;
    cfg_t              cfg;
    logic [DATA_W-1:0] result;
    logic [DATA_W-1:0] op1;
    logic [DATA_W-1:0] op2;
  } am_t;

  // Commands of the decode unit.
  typedef enum logic [1:0] {
    DU_DEREF  = 2'd0,  // load one word
    DU_STREAM = 2'd1,  // load Count consecutive words
    DU_WRITE  = 2'd2   // store one word
  } du_mode_e;

  // Load targets of the off-chip datapath.
  typedef enum logic [1:0] {
    LD_AMQ  = 2'd0,   // push into the AM queue
    LD_DMEM = 2'd1,   // write words into the data memory
    LD_SCAN = 2'd2    // scan a bit vector, write coordinates into data memory
  } ld_target_e;

  // An ALU opcode (not a memory opcode).
  function automatic logic is_alu_op(opcode_e op);
    return (op != OP_LOAD) && (op != OP_STREAM);
  endfunction

  // An AM may execute on an idle intermediate PE when it needs no memory:
  // an ALU opcode, both operands are values and it is not a final AM.
  function automatic logic enroute_ok(am_t m);
    return is_alu_op(m.cfg.opcode) && m.cfg.op1_c && m.cfg.op2_c && m.cfg.res_c;
  endfunction

  // Rotate the destination list: R2 becomes the first, R3 the second.
  function automatic am_t rotate_dest(am_t m);
    am_t r;
    r = m;
    r.r1 = m.r2;
    r.r2 = m.r3;
    r.r3 = m.r1;
    return r;
  endfunction

endpackage
