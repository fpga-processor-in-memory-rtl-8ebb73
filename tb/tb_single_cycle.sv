// tb_single_cycle: a 2 x 2-block array in the Single-Cycle configuration (no
// pipeline registers, read-to-write latency 1). Runs SUB and ADD on random
// operands, then an accumulation (FOLD 1..4, NET level 0 west and north) of the
// sums. MULT is not run: its schedule needs the Full-Pipe latency. Checks every
// result against integer arithmetic and checks that each instruction takes its
// issue cycles plus 3 (start, one-cycle drain, done).
module tb_single_cycle;
  import picaso_pkg::*;
  localparam int ROWS = 2, COLS = 2, N = 6;

  logic clk = 0, rst = 1, start = 0, busy, done;
  instr_t instr;
  logic host_en = 0, host_we = 0;
  logic [0:0] host_row = '0, host_col = '0;
  logic [ADDR_W-1:0] host_addr = '0;
  logic [PES-1:0] host_wdata = '0, host_rdata;

  picaso_top #(.ROWS(ROWS), .COLS(COLS), .RF_PIPE(1'b0), .OP_PIPE(1'b0), .ALU_PIPE(1'b0)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  int a [ROWS][COLS][PES], b [ROWS][COLS][PES];
  always @(posedge clk) cycles++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sext(int v, int w);
    return (v << (32 - w)) >>> (32 - w);
  endfunction

  task automatic host_write(int r, int c, int addr, logic [PES-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_row = 1'(r); host_col = 1'(c); host_addr = ADDR_W'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic get_vec(int r, int c, int base, int w, output int v [PES]);
    for (int p = 0; p < PES; p++) v[p] = 0;
    for (int j = 0; j < w; j++) begin
      @(negedge clk);
      host_en = 1; host_we = 0; host_row = 1'(r); host_col = 1'(c); host_addr = ADDR_W'(base + j);
      @(negedge clk);
      host_en = 0;
      for (int p = 0; p < PES; p++) v[p] |= int'(host_rdata[p]) << j;
    end
    for (int p = 0; p < PES; p++) v[p] = sext(v[p], w);
  endtask

  task automatic run(instr_op_e op, int dst, int s1, int s2, int w, int lvl, net_dir_e dir, int issue);
    int t0;
    @(negedge clk);
    instr = '{op: op, dst: ADDR_W'(dst), src1: ADDR_W'(s1), src2: ADDR_W'(s2),
              width: 6'(w), level: 3'(lvl), dir: dir};
    start = 1;
    t0 = cycles;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cycles - t0 != issue + 3) begin
      failures++;
      $display("FAIL %s took %0d cycles, expected %0d", op.name(), cycles - t0, issue + 3);
    end
  endtask

  initial begin
    int got [PES];
    int total, s;
    instr = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        for (int p = 0; p < PES; p++) begin
          a[r][c][p] = sext(int'($urandom_range(0, 63)), N);
          b[r][c][p] = sext(int'($urandom_range(0, 63)), N);
        end
        for (int j = 0; j < 2 * N; j++) begin
          logic [PES-1:0] wa, wb;
          for (int p = 0; p < PES; p++) begin wa[p] = a[r][c][p][j]; wb[p] = b[r][c][p][j]; end
          host_write(r, c, j, wa);
          host_write(r, c, 12 + j, wb);
        end
      end
    run(OP_SUB, 30, 0, 12, N, 0, DIR_WEST, 2 * N);
    run(OP_ADD, 40, 0, 12, 2 * N, 0, DIR_WEST, 4 * N);
    total = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        get_vec(r, c, 30, N, got);
        for (int p = 0; p < PES; p++) begin
          checks++;
          if (got[p] != sext(a[r][c][p] - b[r][c][p], N)) begin failures++; $display("FAIL SUB"); end
        end
        get_vec(r, c, 40, 2 * N, got);
        for (int p = 0; p < PES; p++) begin
          checks++;
          total += a[r][c][p] + b[r][c][p];
          if (got[p] != a[r][c][p] + b[r][c][p]) begin failures++; $display("FAIL ADD %0d+%0d=%0d", a[r][c][p], b[r][c][p], got[p]); end
        end
      end
    for (int f = 1; f <= 4; f++) run(OP_FOLD, 40, 40, 0, 2 * N, f, DIR_WEST, 2 * N + 1);
    run(OP_NET, 40, 40, 0, 2 * N, 0, DIR_WEST, 1 + 1 + 2 * N);
    run(OP_NET, 40, 40, 0, 2 * N, 0, DIR_NORTH, 1 + 1 + 2 * N);
    get_vec(0, 0, 40, 2 * N, got);
    checks++;
    if (got[0] != total) begin failures++; $display("FAIL MAC got %0d exp %0d", got[0], total); end
    $display("accumulated sum of %0d values: %0d", ROWS * COLS * PES, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
