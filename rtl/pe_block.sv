// pe_block: one PiCaSO PIM block of PES bit-serial PEs sharing a BRAM register file.
//
// Datapath: register file (ports A and B) -> optional RF pipeline register ->
// OpMux (A, B, NET) -> optional OpMux pipeline register -> PES bit-serial ALUs ->
// optional ALU output register -> written back through port B. The three optional
// registers are the paper's pipelining points; RF_PIPE = OP_PIPE = ALU_PIPE = 1 is
// the Full-Pipe configuration (PiCaSO-F), all 0 is Single-Cycle.
//
// Control arrives as one micro-operation per cycle (uop_t). The read fields act in
// the cycle they arrive; the exec fields travel with the data and act at the OpMux
// and ALU stages; the write fields act at once and store the current ALU result.
// Latency from a read to the cycle its result can be written is
// 1 + RF_PIPE + OP_PIPE + ALU_PIPE (4 for Full-Pipe). The ALU output register only
// loads on valid bits, so a result stays available until the next one.
//
// Network: tx_bit is lane 0 of port A after the RF stage ("from regfile" into the
// node's TX; the A bus feeds the network node as in the paper's block figure).
// In a transmitter block (is_xmit) a tx_en read takes port A at tx_addr; in other
// blocks port A follows rda. Writes flagged wr_net happen only in receiver
// blocks (is_recv).
// Host port: h_en/h_we access port B directly; it must be used only while the
// sequencer is idle (asserted).
// From the paper: the block structure, the pipelining points and one-bit network
// stream. The micro-operation format, the port roles and the host port are this
// design's choices.
module pe_block
  import picaso_pkg::*;
#(
  parameter bit RF_PIPE  = 1'b1,
  parameter bit OP_PIPE  = 1'b1,
  parameter bit ALU_PIPE = 1'b1
) (
  input  logic              clk,
  input  logic              rst,
  input  uop_t              uop,
  input  logic              is_recv,
  input  logic              is_xmit,
  input  logic              net_in,
  output logic              tx_bit,
  input  logic              h_en,
  input  logic              h_we,
  input  logic [ADDR_W-1:0] h_addr,
  input  logic [PES-1:0]    h_wdata,
  output logic [PES-1:0]    h_rdata
);
  // ---------------- register file ----------------
  logic [PES-1:0] a_dout, b_dout, result;
  logic           wr_ok, tx_rd, a_en, b_en, b_we;
  logic [ADDR_W-1:0] a_addr;
  logic [ADDR_W-1:0] b_addr;
  logic [PES-1:0] b_din;

  assign wr_ok = uop.wr_en && (!uop.wr_net || is_recv);
  assign tx_rd = uop.tx_en && is_xmit;
  assign a_en  = uop.rda_en || tx_rd;
  assign a_addr = tx_rd ? uop.tx_addr : uop.rda_addr;

  always_comb begin
    if (h_en) begin
      b_en = 1'b1; b_we = h_we; b_addr = h_addr; b_din = h_wdata;
    end else if (wr_ok) begin
      b_en = 1'b1; b_we = 1'b1; b_addr = uop.wr_addr; b_din = result;
    end else begin
      b_en = uop.rdb_en; b_we = 1'b0; b_addr = uop.rdb_addr; b_din = result;
    end
  end
  assign h_rdata = b_dout;

  regfile #(.W(PES), .DEPTH(RF_DEPTH)) u_rf (
    .clk, .a_en, .a_addr, .a_dout,
    .b_en, .b_we, .b_addr, .b_din, .b_dout
  );

  // ---------------- stage 1: BRAM output ----------------
  exec_t ex1;
  always_ff @(posedge clk) begin
    if (rst) ex1 <= '0;
    else     ex1 <= uop.ex;
  end

  // ---------------- stage 2: RF pipeline register ----------------
  logic [PES-1:0] a2, b2;
  exec_t ex2;
  if (RF_PIPE) begin : g_rf_pipe
    always_ff @(posedge clk) begin
      if (rst) ex2 <= '0;
      else     ex2 <= ex1;
      a2 <= a_dout;
      b2 <= b_dout;
    end
  end else begin : g_rf_comb
    assign a2  = a_dout;
    assign b2  = b_dout;
    assign ex2 = ex1;
  end
  assign tx_bit = a2[0];

  // ---------------- OpMux and its pipeline register ----------------
  logic [PES-1:0] xm, ym, x3, y3;
  exec_t ex3;
  opmux #(.W(PES)) u_mux (.cfg(ex2.mux), .a(a2), .b(b2), .net(net_in), .x(xm), .y(ym));

  if (OP_PIPE) begin : g_op_pipe
    always_ff @(posedge clk) begin
      if (rst) ex3 <= '0;
      else     ex3 <= ex2;
      x3 <= xm;
      y3 <= ym;
    end
  end else begin : g_op_comb
    assign x3  = xm;
    assign y3  = ym;
    assign ex3 = ex2;
  end

  // ---------------- ALUs and output register ----------------
  logic [PES-1:0] sum;
  for (genvar i = 0; i < PES; i++) begin : g_pe
    bs_alu u_alu (
      .clk, .rst, .conf(ex3.conf), .op_load(ex3.op_load), .en(ex3.alu_en),
      .x(x3[i]), .y(y3[i]), .sum(sum[i])
    );
  end

  if (ALU_PIPE) begin : g_alu_pipe
    logic [PES-1:0] r4;
    always_ff @(posedge clk) begin
      if (ex3.alu_en) r4 <= sum;
    end
    assign result = r4;
  end else begin : g_alu_comb
    assign result = sum;
  end

`ifndef SYNTHESIS
  // The host port shares port B with the sequencer: never both in one cycle.
  a_host_excl: assert property (@(posedge clk) disable iff (rst)
    h_en |-> !(uop.wr_en || uop.rdb_en || uop.tx_en || uop.rda_en));
`endif
endmodule
