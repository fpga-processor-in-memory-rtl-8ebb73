// bs_alu: bit-serial ALU of one PE (Op-Encoder, op-code register, FA/S, carry/borrow register).
//
// Operation: an op_load cycle runs the Op-Encoder on conf, x and y and stores the
// resulting op-code in a 2-bit register; the same cycle clears the carry/borrow
// register. In each following cycle with en high one operand bit pair (x, y),
// LSB first, goes through the FA/S; sum is combinational and the carry/borrow
// register takes the new carry. With en low the register holds.
// Timing: op_load in cycle t, first data bit at the earliest in cycle t+1.
// Follows the paper's ALU figure (encoder outputs registered before the FA/S,
// carry fed back through a flip-flop). Clearing the carry on op_load, the en
// qualifier and the synchronous reset are this design's choices.
module bs_alu
  import picaso_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [2:0] conf,
  input  logic       op_load,
  input  logic       en,
  input  logic       x,
  input  logic       y,
  output logic       sum
);
  alu_op_e op_enc, op_q;
  logic    cb_q, cb_d;

  op_encoder u_enc (.conf(conf), .x(x), .y(y), .op(op_enc));
  fa_s       u_fas (.op(op_q), .x(x), .y(y), .cb_in(cb_q), .sum(sum), .cb_out(cb_d));

  always_ff @(posedge clk) begin
    if (rst) begin
      op_q <= ALU_CPX;
      cb_q <= 1'b0;
    end else if (op_load) begin
      op_q <= op_enc;
      cb_q <= 1'b0;
    end else if (en) begin
      cb_q <= cb_d;
    end
  end
endmodule
