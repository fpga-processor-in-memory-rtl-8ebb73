// regfile: BRAM register file of a PE block.
//
// A simple model of a dual-port block RAM configured W bits wide and DEPTH words
// deep (16 x 1024 = one 18 Kb BRAM without parity, i.e. 1024 bits per PE).
// Port A is read-only; port B reads or writes (write has priority, read-first).
// Both ports are synchronous: data of a read issued in cycle t appears in cycle
// t+1 and holds until the next read on that port.
// The paper gives the width (16), the 1024 bits per PE and the use of both BRAM
// ports; the port roles (A read, B read/write) are this design's choice.
module regfile #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic [AW-1:0] a_addr,
  output logic [W-1:0]  a_dout,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [W-1:0]  b_din,
  output logic [W-1:0]  b_dout
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) a_dout <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_din;
      b_dout <= mem[b_addr];
    end
  end
endmodule
