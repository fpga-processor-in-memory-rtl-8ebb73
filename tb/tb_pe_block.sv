// tb_pe_block: test of one Full-Pipe PE block driven by hand-made micro-operations.
//
// The testbench plays the sequencer: it loads operands through the host port,
// then issues (1) a bit-serial ADD with the two-cycle schedule (reads on odd
// cycles, writes 5 cycles later), (2) a SUB, (3) a FOLD-1 with one bit per cycle
// (writes exactly 4 cycles after the read, the read-to-write latency of the
// Full-Pipe block), (4) an A-OP-NET accumulation whose NET bits come from the
// testbench, once with the block as receiver and once not (the write must be
// suppressed), and (5) a transmit read on port A, checking tx_bit 2 cycles later.
// Results are read back through the host port and compared with integer sums.
module tb_pe_block;
  import picaso_pkg::*;
  localparam int N = 10;
  localparam int LAT = 4;

  logic clk = 0, rst = 1;
  uop_t uop;
  logic is_recv = 0, is_xmit = 0, net_in = 0, tx_bit;
  logic h_en = 0, h_we = 0;
  logic [ADDR_W-1:0] h_addr = '0;
  logic [PES-1:0] h_wdata = '0, h_rdata;
  int checks = 0, failures = 0;

  pe_block dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pending writes: wr_q[i] takes effect i cycles from now
  typedef struct { bit en; bit net; int addr; } w_t;
  w_t wr_q [16];
  uop_t nxt;

  // apply nxt plus due write, advance one cycle
  task automatic tick();
    nxt.wr_en   = wr_q[0].en;
    nxt.wr_net  = wr_q[0].net;
    nxt.wr_addr = ADDR_W'(wr_q[0].addr);
    uop = nxt;
    @(negedge clk);
    for (int i = 0; i < 15; i++) wr_q[i] = wr_q[i+1];
    wr_q[15] = '{0, 0, 0};
    nxt = '0;
  endtask

  task automatic drain();
    for (int i = 0; i < 16; i++) tick();
  endtask

  task automatic put(int base, int v [PES]);
    for (int j = 0; j < N + 2; j++) begin
      @(negedge clk);
      h_en = 1; h_we = 1; h_addr = ADDR_W'(base + j);
      for (int p = 0; p < PES; p++) h_wdata[p] = v[p][j];
    end
    @(negedge clk);
    h_en = 0; h_we = 0;
  endtask

  task automatic get(int base, output int v [PES]);
    for (int p = 0; p < PES; p++) v[p] = 0;
    for (int j = 0; j < N; j++) begin
      @(negedge clk);
      h_en = 1; h_we = 0; h_addr = ADDR_W'(base + j);
      @(negedge clk);
      h_en = 0;
      for (int p = 0; p < PES; p++) v[p] |= int'(h_rdata[p]) << j;
    end
  endtask

  task automatic elementwise(logic [2:0] conf, int dst, int s1, int s2);
    nxt = '0; nxt.ex.op_load = 1; nxt.ex.conf = conf; tick();
    for (int k = 0; k < N; k++) begin
      nxt.rda_en = 1; nxt.rda_addr = ADDR_W'(s1 + k);
      nxt.rdb_en = 1; nxt.rdb_addr = ADDR_W'(s2 + k);
      nxt.ex.mux = MUX_A_OP_B; nxt.ex.alu_en = 1;
      wr_q[LAT + 1] = '{1, 0, dst + k};   // LAT+1 cycles after this read
      tick();
      tick();
    end
    drain();
  endtask

  task automatic check(string what, int base, int exp [PES]);
    int got [PES];
    get(base, got);
    for (int p = 0; p < PES; p++) begin
      checks++;
      if (got[p] != (exp[p] & ((1 << N) - 1))) begin
        failures++;
        if (failures < 10) $display("FAIL %s pe%0d got %0d exp %0d", what, p, got[p], exp[p] & ((1 << N) - 1));
      end
    end
  endtask

  initial begin
    int a [PES], b [PES], e [PES];
    int bits [N];
    uop = '0; nxt = '0;
    for (int i = 0; i < 16; i++) wr_q[i] = '{0, 0, 0};
    repeat (3) @(negedge clk);
    rst = 0;
    for (int p = 0; p < PES; p++) begin
      a[p] = int'($urandom_range(0, 255));
      b[p] = int'($urandom_range(0, 255));
    end
    put(0, a);
    put(20, b);

    elementwise(CONF_ADD, 40, 0, 20);
    for (int p = 0; p < PES; p++) e[p] = a[p] + b[p];
    check("ADD", 40, e);
    elementwise(CONF_SUB, 60, 0, 20);
    for (int p = 0; p < PES; p++) e[p] = a[p] - b[p];
    check("SUB", 60, e);

    // FOLD-1, one bit per cycle, write LAT cycles after the read
    nxt = '0; nxt.ex.op_load = 1; nxt.ex.conf = CONF_ADD; tick();
    for (int k = 0; k < N; k++) begin
      nxt.rda_en = 1; nxt.rda_addr = ADDR_W'(k);
      nxt.ex.mux = MUX_A_FOLD_1; nxt.ex.alu_en = 1;
      wr_q[LAT] = '{1, 0, 80 + k};
      tick();
    end
    drain();
    for (int p = 0; p < PES; p++) e[p] = (p < 8) ? a[p] + a[p + 8] : a[p];
    check("FOLD1", 80, e);

    // A-OP-NET: NET bit k must be present at the OpMux 2 cycles after the read of bit k
    for (int pass = 0; pass < 2; pass++) begin
      int nv;
      nv = int'($urandom_range(0, 255));
      is_recv = (pass == 0);
      nxt = '0; nxt.ex.op_load = 1; nxt.ex.conf = CONF_ADD; tick();
      for (int k = 0; k < N + 2; k++) begin
        if (k < N) begin
          nxt.rda_en = 1; nxt.rda_addr = ADDR_W'(20 + k);
          nxt.ex.mux = MUX_A_OP_NET; nxt.ex.alu_en = 1;
          wr_q[LAT] = '{1, 1, 100 + k};
        end
        if (k >= 2) net_in = nv[k - 2];
        tick();
      end
      drain();
      for (int p = 0; p < PES; p++) e[p] = (pass == 0) ? ((p == 0) ? b[p] + nv : b[p]) : e[p];
      if (pass == 0) check("NET recv", 100, e);
      else           check("NET not recv (unchanged)", 100, e);
    end

    // transmit read: tx_bit shows lane 0 of port A two cycles after the read
    is_recv = 0; is_xmit = 1;
    for (int k = 0; k < N; k++) begin
      nxt = '0; nxt.tx_en = 1; nxt.tx_addr = ADDR_W'(k); tick();
      tick();
      checks++;
      if (tx_bit !== 1'(a[0] >> k)) begin failures++; $display("FAIL tx bit %0d", k); end
    end
    is_xmit = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
