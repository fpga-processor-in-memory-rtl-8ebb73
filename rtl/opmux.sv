// opmux: operand multiplexer (OpMux) of a PE block.
//
// Chooses the ALU operands X and Y of all PES lanes from the register-file
// ports A and B and the one-bit network stream NET, following the paper's OpMux
// configuration table:
//   A-OP-B   X = A, Y = B                       element-wise operations
//   A-FOLD-f X = A, Y = {0, A[upper part]}       lane i (i < PES>>f) gets A[i + (PES>>f)]
//                                               f = 1..4: halves, quarters, eighths, sixteenths
//   A-OP-NET X = A, Y = {0, NET}                 NET enters lane 0
//   0-OP-B   X = 0, Y = B                       first Booth iteration
// After A-FOLD-1..4 in that order lane 0 holds the sum of all lanes (zero-copy
// reduction). Combinational. That NET feeds lane 0 only is this design's
// reading: the network carries one bit per block and reductions end in PE 0.
module opmux
  import picaso_pkg::*;
#(
  parameter int unsigned W = PES
) (
  input  mux_cfg_e     cfg,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         net,
  output logic [W-1:0] x,
  output logic [W-1:0] y
);
  // Fold of A by 'sh' lanes: lanes below sh take the lane sh above, the rest zero.
  function automatic logic [W-1:0] fold(input logic [W-1:0] v, input int unsigned sh);
    logic [W-1:0] r;
    r = v >> sh;
    for (int unsigned i = 0; i < W; i++)
      if (i >= sh) r[i] = 1'b0;
    return r;
  endfunction

  always_comb begin
    x = a;
    y = b;
    unique case (cfg)
      MUX_A_OP_B:   y = b;
      MUX_A_FOLD_1: y = fold(a, W >> 1);
      MUX_A_FOLD_2: y = fold(a, W >> 2);
      MUX_A_FOLD_3: y = fold(a, W >> 3);
      MUX_A_FOLD_4: y = fold(a, W >> 4);
      MUX_A_OP_NET: y = {{(W-1){1'b0}}, net};
      MUX_0_OP_B: begin
        x = '0;
        y = b;
      end
      default: y = b;
    endcase
  end
endmodule
