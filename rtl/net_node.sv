// net_node: network node (N) of the PiCaSO binary-hopping reduction network.
//
// Each node sits next to one PE block in a ROWS x COLS mesh with N/E/W/S links.
// A configuration register holds the level L (3 bits, as in the paper's node
// figure) and a reduction direction. The decoder derives the node's role from L
// and its position p along that direction (column index for a row reduction):
//   p mod 2^(L+1) == 0    -> receiver (R)
//   p mod 2^(L+1) == 2^L  -> transmitter (T)
//   otherwise             -> pass-through (P)
// which reproduces the paper's level 0/1/2 patterns over 8 nodes (level 0: even
// nodes receive from their right neighbour; level 1: 0<-2, 4<-6; level 2: 0<-4).
// RX selects the input link facing the transmitters, and a capture register
// samples it every cycle; NET (to the OpMux of the own block) is that register.
// TX sends the block's register-file bit in a transmitter and the captured bit
// otherwise; its output drives all four outgoing links.
// Timing: a bit leaving a transmitter reaches NET of the receiver 2^L cycles later
// (one capture register per hop), the "q/16" term of the paper's accumulation latency.
// Own choices: the direction field (the paper only shows row reduction), the
// position reversal for east/south reductions, reset values. The paper's node
// figure also shows a Shift-In/Shift-Out register feeding NET; the text never
// describes it, so it is not built here.
module net_node
  import picaso_pkg::*;
#(
  parameter int unsigned ROW  = 0,
  parameter int unsigned COL  = 0,
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic      clk,
  input  logic      rst,
  input  net_cfg_t  cfg,
  input  logic      rx_n,
  input  logic      rx_e,
  input  logic      rx_w,
  input  logic      rx_s,
  input  logic      rf_bit,   // from the register file of the own block
  output logic      tx,       // to all four neighbours
  output logic      net,      // to the OpMux of the own block
  output net_role_e role
);
  logic [LEVEL_W-1:0] level_q;
  net_dir_e           dir_q;
  logic               cap_q, rx;
  int unsigned        pos, span;

  always_ff @(posedge clk) begin
    if (rst) begin
      level_q <= '0;
      dir_q   <= DIR_WEST;
    end else if (cfg.we) begin
      level_q <= cfg.level;
      dir_q   <= cfg.dir;
    end
  end

  // Decoder: role from level and position.
  always_comb begin
    unique case (dir_q)
      DIR_WEST:  pos = COL;
      DIR_NORTH: pos = ROW;
      DIR_EAST:  pos = COLS - 1 - COL;
      default:   pos = ROWS - 1 - ROW;
    endcase
    span = 32'd1 << level_q;
    if ((pos % (2 * span)) == 0)         role = ROLE_R;
    else if ((pos % (2 * span)) == span) role = ROLE_T;
    else                                 role = ROLE_P;
  end

  // RX: listen to the neighbour on the transmitter side.
  always_comb begin
    unique case (dir_q)
      DIR_WEST:  rx = rx_e;
      DIR_NORTH: rx = rx_s;
      DIR_EAST:  rx = rx_w;
      default:   rx = rx_n;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) cap_q <= 1'b0;
    else     cap_q <= rx;
  end

  assign net = cap_q;
  assign tx  = (role == ROLE_T) ? rf_bit : cap_q;
endmodule
