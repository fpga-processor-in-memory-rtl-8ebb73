// picaso_ctrl: instruction sequencer of a PiCaSO array.
//
// Expands one array instruction (instr_t) into the per-cycle micro-operations
// (uop_t) that are broadcast to every PE block, SIMD style, and into the network
// configuration (net_cfg_t). One instruction runs at a time: start is accepted in
// IDLE, the issue phase follows, then the pipeline drains and done pulses for one
// cycle. Operands are N = width bits, stored LSB first at consecutive addresses.
//
// Issue schedules (t counts cycles of the issue phase, LAT = 1 + RF_PIPE + OP_PIPE
// + ALU_PIPE is the read-to-write latency of a PE block):
//  * ADD/SUB/CPX/CPY: t=0 loads the op-code; bit k is read on both ports at
//    t=2k+1 and written through port B WB2 cycles later, WB2 = LAT rounded up to
//    an odd number so writes fall between reads: 2 cycles per bit, 2N in all.
//  * MULT (Booth radix-2, signed): N iterations of N+2 two-cycle slots. Slot 0
//    reads multiplier bits q_i (Y) and q_i-1 (X) and lets the Op-Encoder choose
//    +M, -M or nothing; slots 1..N+1 add/subtract/copy the multiplicand onto
//    product bits i..i+N (bit N repeats the sign bits). Iteration 0 uses 0-OP-B
//    so the product needs no clearing. 2N^2 + 4N cycles.
//  * FOLD f: t=0 loads ADD; bit k is read on port A at t=k+1 with OpMux A-FOLD-f
//    and written through port B LAT cycles later: 1 cycle per bit.
//  * NET L: t=0 writes level/direction to all nodes and loads ADD; transmitter
//    blocks read bit k on port A at t=k+1; receivers read their own bit k on port
//    A at t=k+1+2^L, when the bit arrives on NET, and write the sum LAT later.
// The paper gives the operation set and the cycle costs (2N for ADD/SUB, 2N^2+2N
// for MULT, N+4 per fold or network jump plus one cycle per hop). This schedule is
// this design's own; MULT spends one extra slot per iteration on reading the
// multiplier bits, so it takes 2N^2+4N instead of the paper's 2N^2+2N.
// Supported pipeline settings: an odd LAT, or ALU_PIPE = 1 (checked at elaboration).
// MULT additionally needs WB2 >= 3 (Full-Pipe): its sign-extension step re-reads
// the top product bit of the previous iteration before the current iteration
// overwrites it, which a one-cycle read-to-write latency does not allow
// (asserted when a MULT starts).
module picaso_ctrl
  import picaso_pkg::*;
#(
  parameter bit RF_PIPE  = 1'b1,
  parameter bit OP_PIPE  = 1'b1,
  parameter bit ALU_PIPE = 1'b1
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     start,
  input  instr_t   instr,
  output logic     busy,
  output logic     done,
  output uop_t     uop,
  output net_cfg_t net_cfg
);
  localparam int unsigned LAT = 1 + int'(RF_PIPE) + int'(OP_PIPE) + int'(ALU_PIPE);
  localparam int unsigned WB1 = LAT;
  localparam int unsigned WB2 = (LAT % 2 == 1) ? LAT : LAT + 1;
  localparam int unsigned QD  = WB2;

  if ((LAT % 2 == 0) && !ALU_PIPE) begin : g_bad_cfg
    $error("picaso_ctrl: an even read-to-write latency needs the ALU output register");
  end

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  typedef struct packed {
    logic              en;
    logic              net;
    logic [ADDR_W-1:0] addr;
  } wq_t;

  state_e            state;
  instr_t            ins;
  logic [15:0]       t;          // cycle of the issue phase
  logic [5:0]        mi;         // MULT iteration
  logic [6:0]        mj;         // MULT slot
  logic              mph;        // MULT phase within a slot
  wq_t               wq [QD];
  logic              push;
  int unsigned       push_d;
  wq_t               push_e;
  logic              last;       // last cycle of the issue phase
  logic              wq_empty;

  logic [15:0]       span;       // 2^level
  logic [5:0]        km;         // min(k, N-1) in MULT

  assign span = 16'd1 << ins.level;

  // ---------------- micro-operation generation ----------------
  always_comb begin
    uop       = '0;
    net_cfg   = '0;
    push      = 1'b0;
    push_d    = WB1;
    push_e    = '0;
    last      = 1'b0;
    km        = '0;
    if (state == S_RUN) begin
      unique case (ins.op)
        OP_ADD, OP_SUB, OP_CPX, OP_CPY: begin
          if (t == 0) begin
            uop.ex.op_load = 1'b1;
            unique case (ins.op)
              OP_ADD:  uop.ex.conf = CONF_ADD;
              OP_SUB:  uop.ex.conf = CONF_SUB;
              OP_CPX:  uop.ex.conf = CONF_CPX;
              default: uop.ex.conf = CONF_CPY;
            endcase
          end else if (t[0]) begin
            uop.rda_en    = 1'b1;
            uop.rda_addr  = ins.src1 + ADDR_W'(t >> 1);
            uop.rdb_en    = 1'b1;
            uop.rdb_addr  = ins.src2 + ADDR_W'(t >> 1);
            uop.ex.mux    = MUX_A_OP_B;
            uop.ex.alu_en = 1'b1;
            push          = 1'b1;
            push_d        = WB2;
            push_e        = '{en: 1'b1, net: 1'b0, addr: ins.dst + ADDR_W'(t >> 1)};
          end
          last = (t == 16'(2 * ins.width - 1));
        end
        OP_MULT: begin
          km = (mj > 7'(ins.width)) ? ins.width - 6'd1 : 6'(mj - 7'd1);
          if (!mph) begin
            uop.ex.mux = (mi == 0) ? MUX_0_OP_B : MUX_A_OP_B;
            if (mj == 0) begin
              // Booth recoding step: X = q_i-1, Y = q_i (src2 is the multiplier).
              uop.rda_en     = (mi != 0);
              uop.rda_addr   = ins.src2 + ADDR_W'(mi) - 1'b1;
              uop.rdb_en     = 1'b1;
              uop.rdb_addr   = ins.src2 + ADDR_W'(mi);
              uop.ex.conf    = CONF_BOOTH;
              uop.ex.op_load = 1'b1;
            end else begin
              uop.rda_en    = (mi != 0);
              uop.rda_addr  = ins.dst + ADDR_W'(mi) + ADDR_W'(km);
              uop.rdb_en    = 1'b1;
              uop.rdb_addr  = ins.src1 + ADDR_W'(km);
              uop.ex.alu_en = 1'b1;
              push          = 1'b1;
              push_d        = WB2;
              push_e        = '{en: 1'b1, net: 1'b0,
                                addr: ins.dst + ADDR_W'(mi) + ADDR_W'(mj) - 1'b1};
            end
          end
          last = mph && (mj == 7'(ins.width) + 7'd1) && (mi == ins.width - 6'd1);
        end
        OP_FOLD: begin
          if (t == 0) begin
            uop.ex.op_load = 1'b1;
            uop.ex.conf    = CONF_ADD;
          end else begin
            uop.rda_en    = 1'b1;
            uop.rda_addr  = ins.src1 + ADDR_W'(t - 1);
            uop.ex.alu_en = 1'b1;
            unique case (ins.level)
              3'd1:    uop.ex.mux = MUX_A_FOLD_1;
              3'd2:    uop.ex.mux = MUX_A_FOLD_2;
              3'd3:    uop.ex.mux = MUX_A_FOLD_3;
              default: uop.ex.mux = MUX_A_FOLD_4;
            endcase
            push   = 1'b1;
            push_d = WB1;
            push_e = '{en: 1'b1, net: 1'b0, addr: ins.dst + ADDR_W'(t - 1)};
          end
          last = (t == 16'(ins.width));
        end
        default: begin // OP_NET
          if (t == 0) begin
            net_cfg        = '{we: 1'b1, level: ins.level, dir: ins.dir};
            uop.ex.op_load = 1'b1;
            uop.ex.conf    = CONF_ADD;
          end else begin
            if (t <= 16'(ins.width)) begin
              uop.tx_en   = 1'b1;
              uop.tx_addr = ins.src1 + ADDR_W'(t - 1);
            end
            if (t > span) begin
              uop.rda_en    = 1'b1;
              uop.rda_addr  = ins.src1 + ADDR_W'(t - 16'd1 - span);
              uop.ex.mux    = MUX_A_OP_NET;
              uop.ex.alu_en = 1'b1;
              push   = 1'b1;
              push_d = WB1;
              push_e = '{en: 1'b1, net: 1'b1, addr: ins.dst + ADDR_W'(t - 16'd1 - span)};
            end
          end
          last = (t == span + 16'(ins.width));
        end
      endcase
    end
    uop.wr_en   = wq[0].en;
    uop.wr_net  = wq[0].net;
    uop.wr_addr = wq[0].addr;
  end

  always_comb begin
    wq_empty = 1'b1;
    for (int i = 0; i < QD; i++) if (wq[i].en) wq_empty = 1'b0;
  end

  // ---------------- write-back queue ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < QD; i++) wq[i] <= '0;
    end else begin
      for (int i = 0; i < QD - 1; i++) wq[i] <= wq[i+1];
      wq[QD-1] <= '0;
      if (push) wq[push_d-1] <= push_e;
    end
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      ins   <= '0;
      t     <= '0;
      mi    <= '0;
      mj    <= '0;
      mph   <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ins   <= instr;
          state <= S_RUN;
          t     <= '0;
          mi    <= '0;
          mj    <= '0;
          mph   <= 1'b0;
        end
        S_RUN: begin
          t   <= t + 1'b1;
          mph <= !mph;
          if (mph) begin
            if (mj == 7'(ins.width) + 7'd1) begin
              mj <= '0;
              mi <= mi + 1'b1;
            end else begin
              mj <= mj + 1'b1;
            end
          end
          if (last) state <= S_DRAIN;
        end
        default: if (wq_empty) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);

`ifndef SYNTHESIS
  a_width: assert property (@(posedge clk) disable iff (rst)
    (start && state == S_IDLE) |-> instr.width != 0);
  a_mult_lat: assert property (@(posedge clk) disable iff (rst)
    (start && state == S_IDLE && instr.op == OP_MULT) |-> WB2 >= 3);
  a_port_b: assert property (@(posedge clk) disable iff (rst)
    !(uop.wr_en && uop.rdb_en));
`endif
endmodule
