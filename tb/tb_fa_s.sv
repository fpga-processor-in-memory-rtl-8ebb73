// tb_fa_s: exhaustive test of the one-bit full adder/subtractor.
// All 4 op-codes x 8 input combinations are compared with integer arithmetic:
// ADD: x + y + c = {cout, sum}; SUB: x - y - b = sum - 2*bout; CPX/CPY pass x/y.
module tb_fa_s;
  import picaso_pkg::*;
  alu_op_e op;
  logic x, y, cb_in, sum, cb_out;
  int checks = 0, failures = 0;

  fa_s dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 4; o++)
      for (int v = 0; v < 8; v++) begin
        int es, ec;
        op = alu_op_e'(o);
        {x, y, cb_in} = 3'(v);
        #1;
        case (op)
          ALU_ADD: begin es = (int'(x) + int'(y) + int'(cb_in)) % 2; ec = (int'(x) + int'(y) + int'(cb_in)) / 2; end
          ALU_SUB: begin
            int d;
            d  = int'(x) - int'(y) - int'(cb_in);
            es = (d + 4) % 2;
            ec = (d < 0) ? 1 : 0;
          end
          ALU_CPX: begin es = int'(x); ec = 0; end
          default: begin es = int'(y); ec = 0; end
        endcase
        checks++;
        if (int'(sum) != es || int'(cb_out) != ec) begin
          failures++;
          $display("FAIL op=%s x=%0d y=%0d c=%0d -> sum=%0d cb=%0d exp %0d %0d",
                   op.name(), x, y, cb_in, sum, cb_out, es, ec);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
