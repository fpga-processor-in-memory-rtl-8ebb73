// fa_s: one-bit full adder/subtractor of the bit-serial ALU (FA/S).
//
// Implements the four operations of the FA/S op-code table: ADD (X + Y with
// carry), SUB (X - Y with borrow), CPX (pass X) and CPY (pass Y). The carry or
// borrow of the previous bit comes in on cb_in and the new one leaves on cb_out;
// the register that holds it lives in bs_alu. Purely combinational.
// The paper gives the operations; the gate equations are the textbook full
// adder and full subtractor, and CPX/CPY return a zero carry (this design's choice).
module fa_s
  import picaso_pkg::*;
(
  input  alu_op_e op,
  input  logic    x,
  input  logic    y,
  input  logic    cb_in,
  output logic    sum,
  output logic    cb_out
);
  always_comb begin
    unique case (op)
      ALU_ADD: begin
        sum    = x ^ y ^ cb_in;
        cb_out = (x & y) | (x & cb_in) | (y & cb_in);
      end
      ALU_SUB: begin
        sum    = x ^ y ^ cb_in;
        cb_out = (~x & y) | (~(x ^ y) & cb_in);
      end
      ALU_CPX: begin
        sum    = x;
        cb_out = 1'b0;
      end
      default: begin // ALU_CPY
        sum    = y;
        cb_out = 1'b0;
      end
    endcase
  end
endmodule
