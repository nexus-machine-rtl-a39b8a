// tb_crossbar: random one-hot selections; every selected output must carry
// the message of its selected input and unselected outputs must be invalid.
module tb_crossbar;
  import nm_pkg::*;
  am_t  [4:0]      in_msg, out_msg;
  logic [4:0][4:0] sel;
  logic [4:0]      out_valid;
  int src [5];
  int checks = 0, failures = 0;

  crossbar dut (.in_msg, .sel, .out_valid, .out_msg);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 5; i++) in_msg[i] = am_t'({6'($urandom), 32'($urandom), 32'($urandom)});
      sel = '0;
      for (int o = 0; o < 5; o++) begin
        src[o] = $urandom % 6;
        if (src[o] < 5) sel[o][src[o]] = 1'b1;
      end
      #1;
      for (int o = 0; o < 5; o++) begin
        checks++;
        if (src[o] < 5) begin
          if (!out_valid[o] || out_msg[o] !== in_msg[src[o]]) begin failures++; $display("FAIL o=%0d", o); end
        end else if (out_valid[o]) begin
          failures++; $display("FAIL valid o=%0d", o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
