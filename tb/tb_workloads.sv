// tb_workloads: the reduction and multiply-accumulate cases whose latencies the
// paper tabulates, run on a 1 x 8-block array (128 PEs, one row of q = 128 columns).
//  * Accumulation of q = 128 values of N = 32 bits: FOLD 1..4 inside each block,
//    then NET levels 0, 1, 2 (J = 3 network jumps). The paper quotes 259 cycles.
//  * Multiply-accumulate of q = 16 products (one block) at N = 4, 8 and 16 bits:
//    Booth MULT, then FOLD 1..4 on the 2N-bit products.
// Results are checked against integer arithmetic, and the measured cycle counts
// (start of the first instruction to done of the last) against this design's
// schedule: every instruction costs its issue cycles plus 6 cycles of
// start, pipeline drain and done at Full-Pipe.
module tb_workloads;
  import picaso_pkg::*;
  localparam int ROWS = 1, COLS = 8;

  logic clk = 0, rst = 1, start = 0, busy, done;
  instr_t instr;
  logic host_en = 0, host_we = 0;
  logic [0:0] host_row = '0;
  logic [2:0] host_col = '0;
  logic [ADDR_W-1:0] host_addr = '0;
  logic [PES-1:0] host_wdata = '0, host_rdata;

  picaso_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write(int c, int addr, logic [PES-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_col = 3'(c); host_addr = ADDR_W'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(int c, int addr, output logic [PES-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_col = 3'(c); host_addr = ADDR_W'(addr);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  task automatic put_vec(int c, int base, int w, longint v [PES]);
    for (int j = 0; j < w; j++) begin
      logic [PES-1:0] word;
      for (int p = 0; p < PES; p++) word[p] = v[p][j];
      host_write(c, base + j, word);
    end
  endtask

  task automatic get_pe0(int c, int base, int w, output longint v);
    logic [PES-1:0] word;
    v = 0;
    for (int j = 0; j < w; j++) begin
      host_read(c, base + j, word);
      v |= longint'(word[0]) << j;
    end
  endtask

  // run one instruction back to back; returns cycles from start to done
  task automatic run(instr_op_e op, int dst, int s1, int s2, int w, int lvl, output int lat);
    int t0;
    @(negedge clk);
    instr = '{op: op, dst: ADDR_W'(dst), src1: ADDR_W'(s1), src2: ADDR_W'(s2),
              width: 6'(w), level: 3'(lvl), dir: DIR_WEST};
    start = 1;
    t0 = cycles;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    lat = cycles - t0;
  endtask

  task automatic expect_cycles(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s cycles %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    longint v [PES];
    longint mask, sum, got;
    int lat, total;
    instr = '0;
    repeat (3) @(negedge clk);
    rst = 0;

    // ---------------- accumulation, q = 128, N = 32 ----------------
    mask = (64'd1 << 32) - 1;
    sum = 0;
    for (int c = 0; c < COLS; c++) begin
      for (int p = 0; p < PES; p++) begin
        v[p] = longint'({$urandom}) & mask;
        sum += v[p];
      end
      put_vec(c, 0, 32, v);
    end
    total = 0;
    for (int f = 1; f <= 4; f++) begin run(OP_FOLD, 0, 0, 0, 32, f, lat); total += lat; end
    for (int l = 0; l < 3; l++) begin run(OP_NET, 0, 0, 0, 32, l, lat); total += lat; end
    get_pe0(0, 0, 32, got);
    checks++;
    if (got != (sum & mask)) begin failures++; $display("FAIL accumulate q=128 got %0d exp %0d", got, sum & mask); end
    // 4 folds of (N+1)+6 and 3 jumps of (1+2^L+N)+6
    expect_cycles("accumulate q=128 N=32", total, 4 * (32 + 7) + 3 * (32 + 7) + (1 + 2 + 4));
    $display("accumulation q=128 N=32: %0d cycles (paper, PiCaSO-F: 259)", total);

    // ---------------- MAC, q = 16, N = 4, 8, 16 ----------------
    for (int n = 4; n <= 16; n *= 2) begin
      longint a [PES], b [PES];
      int tm, tf;
      sum = 0;
      for (int p = 0; p < PES; p++) begin
        a[p] = longint'($urandom_range(0, (1 << n) - 1));
        b[p] = longint'($urandom_range(0, (1 << n) - 1));
        // signed values
        sum += ((a[p] << (64 - n)) >>> (64 - n)) * ((b[p] << (64 - n)) >>> (64 - n));
      end
      put_vec(0, 100, n, a);
      put_vec(0, 200, n, b);
      run(OP_MULT, 300, 100, 200, n, 0, tm);
      tf = 0;
      for (int f = 1; f <= 4; f++) begin run(OP_FOLD, 300, 300, 0, 2 * n, f, lat); tf += lat; end
      get_pe0(0, 300, 2 * n, got);
      mask = (64'd1 << (2 * n)) - 1;
      checks++;
      if (got != (sum & mask)) begin failures++; $display("FAIL MAC N=%0d got %0d exp %0d", n, got, sum & mask); end
      expect_cycles($sformatf("MULT N=%0d", n), tm, 2 * n * n + 4 * n + 6);
      expect_cycles($sformatf("fold q=16 2N=%0d", 2 * n), tf, 4 * (2 * n + 7));
      $display("MAC q=16 N=%0d: MULT %0d cycles (paper 2N^2+2N = %0d), accumulate %0d cycles (paper (N+4)log2 q = %0d for N-bit operands)",
               n, tm, 2 * n * n + 2 * n, tf, (2 * n + 4) * 4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
