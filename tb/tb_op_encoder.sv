// tb_op_encoder: exhaustive test of the Op-Encoder against the Conf/YX table:
// Conf 000 ADD, 001 CPX, 010 CPY, 011 SUB; Conf 1xx with YX 00 CPX, 01 ADD, 10 SUB, 11 CPX.
module tb_op_encoder;
  import picaso_pkg::*;
  logic [2:0] conf;
  logic x, y;
  alu_op_e op;
  int checks = 0, failures = 0;

  op_encoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_e direct [4] = '{ALU_ADD, ALU_CPX, ALU_CPY, ALU_SUB};
    alu_op_e booth  [4] = '{ALU_CPX, ALU_ADD, ALU_SUB, ALU_CPX};  // index = {Y,X}
    for (int c = 0; c < 8; c++)
      for (int yx = 0; yx < 4; yx++) begin
        alu_op_e exp;
        conf = 3'(c);
        y = yx[1];
        x = yx[0];
        #1;
        exp = (c < 4) ? direct[c] : booth[yx];
        checks++;
        if (op != exp) begin
          failures++;
          $display("FAIL conf=%b YX=%b -> %s exp %s", conf, {y, x}, op.name(), exp.name());
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
