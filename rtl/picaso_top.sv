// picaso_top: a PiCaSO tile - ROWS x COLS PE blocks with their network nodes and one sequencer.
//
// Every PE block (16 bit-serial PEs on one BRAM) receives the same micro-operation
// stream from picaso_ctrl. Each block has a network node; the nodes form a mesh
// (N/E/W/S links between neighbours, edges tied to zero) and, for a network
// instruction, take receiver, transmitter or pass-through roles from the
// configured level, so that partial sums hop between blocks and are added
// bit-serially inside the receiving ALU. A full row reduction of q = 16*COLS
// values of N bits is FOLD 1..4 followed by NET levels 0..log2(COLS)-1, after
// which PE 0 of the column-0 block holds the row sum.
//
// Host port: while busy is low the host may read or write one 16-bit word (bit
// position 'addr' of the 16 PEs) of the block at (host_row, host_col); read data
// appears on host_rdata one cycle after a read. Instructions: pulse start with
// instr while busy is low; done pulses when all results are written.
// Default size: the paper's 4 x 4-block tile (256 PEs) in the Full-Pipe
// configuration. The host port is this design's own addition.
module picaso_top
  import picaso_pkg::*;
#(
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 4,
  parameter bit          RF_PIPE  = 1'b1,
  parameter bit          OP_PIPE  = 1'b1,
  parameter bit          ALU_PIPE = 1'b1,
  localparam int unsigned RW      = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW      = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  instr_t            instr,
  output logic              busy,
  output logic              done,
  input  logic              host_en,
  input  logic              host_we,
  input  logic [RW-1:0]     host_row,
  input  logic [CW-1:0]     host_col,
  input  logic [ADDR_W-1:0] host_addr,
  input  logic [PES-1:0]    host_wdata,
  output logic [PES-1:0]    host_rdata
);
  uop_t     uop;
  net_cfg_t net_cfg;

  picaso_ctrl #(.RF_PIPE(RF_PIPE), .OP_PIPE(OP_PIPE), .ALU_PIPE(ALU_PIPE)) u_ctrl (
    .clk, .rst, .start, .instr, .busy, .done, .uop, .net_cfg
  );

  logic      tx    [ROWS][COLS];
  logic      net   [ROWS][COLS];
  logic      rfbit [ROWS][COLS];
  net_role_e role  [ROWS][COLS];
  logic [PES-1:0] rdata [ROWS][COLS];
  logic [RW-1:0]  rd_row;
  logic [CW-1:0]  rd_col;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic sel;
      assign sel = host_en && (int'(host_row) == r) && (int'(host_col) == c);

      net_node #(.ROW(r), .COL(c), .ROWS(ROWS), .COLS(COLS)) u_node (
        .clk, .rst, .cfg(net_cfg),
        .rx_n((r > 0)        ? tx[(r > 0) ? r-1 : 0][c]        : 1'b0),
        .rx_s((r < ROWS - 1) ? tx[(r < ROWS-1) ? r+1 : r][c]   : 1'b0),
        .rx_w((c > 0)        ? tx[r][(c > 0) ? c-1 : 0]        : 1'b0),
        .rx_e((c < COLS - 1) ? tx[r][(c < COLS-1) ? c+1 : c]   : 1'b0),
        .rf_bit(rfbit[r][c]), .tx(tx[r][c]), .net(net[r][c]), .role(role[r][c])
      );

      pe_block #(.RF_PIPE(RF_PIPE), .OP_PIPE(OP_PIPE), .ALU_PIPE(ALU_PIPE)) u_blk (
        .clk, .rst, .uop,
        .is_recv(role[r][c] == ROLE_R), .is_xmit(role[r][c] == ROLE_T),
        .net_in(net[r][c]), .tx_bit(rfbit[r][c]),
        .h_en(sel), .h_we(host_we), .h_addr(host_addr), .h_wdata(host_wdata),
        .h_rdata(rdata[r][c])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (host_en && !host_we) begin
      rd_row <= host_row;
      rd_col <= host_col;
    end
  end
  assign host_rdata = rdata[rd_row][rd_col];

`ifndef SYNTHESIS
  a_host_idle: assert property (@(posedge clk) disable iff (rst) host_en |-> !busy);
`endif
endmodule
