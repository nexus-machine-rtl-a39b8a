// tb_alu: self-checking test of the ALU. Applies directed corner cases and
// random operands to every opcode and compares with a reference computed in
// the testbench.
module tb_alu;
  import nm_pkg::*;
  logic [15:0] a, b, y;
  opcode_e     op;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .y);

  function automatic logic [15:0] ref_alu(opcode_e o, logic [15:0] x, logic [15:0] z);
    logic [31:0] p;
    p = 32'(x) * 32'(z);
    case (o)
      OP_ADD: return x + z;
      OP_SUB: return x - z;
      OP_MUL: return p[15:0];
      OP_DIV: return (z == 0) ? 16'hFFFF : 16'(x / z);
      OP_AND: return x & z;
      OP_MIN: return (x < z) ? x : z;
      default: return x;
    endcase
  endfunction

  task automatic apply(opcode_e o, logic [15:0] x, logic [15:0] z);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== ref_alu(o, x, z)) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, x, z, y, ref_alu(o, x, z));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(OP_ADD, 16'hFFFF, 16'h0001);
    apply(OP_SUB, 16'h0000, 16'h0001);
    apply(OP_MUL, 16'h0100, 16'h0100);
    apply(OP_MUL, 16'd7, 16'd6);
    apply(OP_DIV, 16'd100, 16'd7);
    apply(OP_DIV, 16'd5, 16'd0);
    apply(OP_AND, 16'hF0F0, 16'h0FF0);
    apply(OP_MIN, 16'd3, 16'd9);
    apply(OP_MIN, 16'd9, 16'd3);
    apply(OP_LOAD, 16'h1234, 16'h9999);
    for (int i = 0; i < 400; i++)
      apply(opcode_e'(3'($urandom)), 16'($urandom), 16'($urandom % 300));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
