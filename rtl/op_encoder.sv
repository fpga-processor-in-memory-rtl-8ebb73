// op_encoder: Op-Encoder of the bit-serial ALU.
//
// Maps the 3-bit configuration code and the current X/Y operand bits to an FA/S
// op-code, exactly as the paper's Op-Encoder table: Conf 000/001/010/011 request
// ADD/CPX/CPY/SUB regardless of the operands; Conf 1xx performs Booth radix-2
// recoding of the operand pair YX (Y = multiplier bit q_i, X = q_i-1):
// 00 and 11 -> CPX (no operation), 01 -> ADD (+Y), 10 -> SUB (-Y).
// Combinational; the op-code register that follows it is in bs_alu.
module op_encoder
  import picaso_pkg::*;
(
  input  logic [2:0] conf,
  input  logic       x,
  input  logic       y,
  output alu_op_e    op
);
  always_comb begin
    if (!conf[2]) begin
      op = alu_op_e'(conf[1:0]);
    end else begin
      unique case ({y, x})
        2'b01:   op = ALU_ADD;
        2'b10:   op = ALU_SUB;
        default: op = ALU_CPX;
      endcase
    end
  end
endmodule
