// tb_picaso_top: end-to-end test of a PiCaSO tile at its default size (4 x 4 blocks,
// 256 PEs, Full-Pipe).
//
// The host port loads random signed operands, corner-turned (word j of a block
// holds bit j of its 16 PEs). The test then runs ADD, SUB and a signed Booth MULT
// on every PE, and a full multiply-accumulate: MULT of small operands, FOLD 1..4
// inside each block, NET levels 0 and 1 westwards (row sums in column 0) and NET
// levels 0 and 1 northwards (tile sum in block (0,0), PE 0). Every result is read
// back through the host port and compared with integer arithmetic done here.
// The number of issue cycles of each instruction is compared with its schedule,
// and the test counts how often each mechanism occurred (Booth add/subtract/no-op
// steps, every fold level, receiver/transmitter/pass-through roles, suppressed
// network writes, pass-through hops) and fails for any that never did.
module tb_picaso_top;
  import picaso_pkg::*;

  localparam int ROWS = 4, COLS = 4, N = 8;
  localparam int A0 = 0, B0 = 16, C0 = 32, D0 = 48, P0 = 64, E0 = 96, F0 = 112, Q0 = 128;

  logic clk = 0, rst = 1, start = 0, busy, done;
  instr_t instr;
  logic host_en = 0, host_we = 0;
  logic [1:0] host_row, host_col;
  logic [ADDR_W-1:0] host_addr;
  logic [PES-1:0] host_wdata, host_rdata;

  picaso_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  int run_cycles;
  int a [ROWS][COLS][PES], b [ROWS][COLS][PES];
  int n_booth_add = 0, n_booth_sub = 0, n_booth_nop = 0;
  int n_fold [5];
  int n_role_r = 0, n_role_t = 0, n_role_p = 0, n_net_suppr = 0, n_hop = 0;

  always @(posedge clk) cycles++;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism monitors ----------------
  always @(posedge clk) if (!rst) begin
    if (dut.u_ctrl.state == 2'd1) run_cycles++;
    // Booth decisions taken by the Op-Encoder of PE 0, block (0,0)
    if (dut.g_row[0].g_col[0].u_blk.ex3.op_load && dut.g_row[0].g_col[0].u_blk.ex3.conf == CONF_BOOTH) begin
      // PEs 0 and 1 of block (0,0)
      case (dut.g_row[0].g_col[0].u_blk.g_pe[0].u_alu.op_enc)
        ALU_ADD: n_booth_add++;
        ALU_SUB: n_booth_sub++;
        default: n_booth_nop++;
      endcase
      case (dut.g_row[0].g_col[0].u_blk.g_pe[1].u_alu.op_enc)
        ALU_ADD: n_booth_add++;
        ALU_SUB: n_booth_sub++;
        default: n_booth_nop++;
      endcase
    end
    if (dut.g_row[0].g_col[0].u_blk.ex2.alu_en) begin
      case (dut.g_row[0].g_col[0].u_blk.ex2.mux)
        MUX_A_FOLD_1: n_fold[1]++;
        MUX_A_FOLD_2: n_fold[2]++;
        MUX_A_FOLD_3: n_fold[3]++;
        MUX_A_FOLD_4: n_fold[4]++;
        default: ;
      endcase
    end
    if (dut.uop.wr_en && dut.uop.wr_net) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          case (dut.role[r][c])
            ROLE_R: n_role_r++;
            ROLE_T: n_role_t++;
            default: begin n_role_p++; n_net_suppr++; end
          endcase
        end
      // a pass-through node forwarding a bit it captured
      if (dut.role[0][1] == ROLE_P && dut.g_row[0].g_col[1].u_node.tx == dut.g_row[0].g_col[1].u_node.cap_q)
        n_hop++;
    end
  end

  // ---------------- host access ----------------
  task automatic host_write(int r, int c, int addr, logic [PES-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_row = 2'(r); host_col = 2'(c);
    host_addr = ADDR_W'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(int r, int c, int addr, output logic [PES-1:0] d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_row = 2'(r); host_col = 2'(c); host_addr = ADDR_W'(addr);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  // write N-bit values v[pe] of block (r,c) at base, corner-turned
  task automatic put_vec(int r, int c, int base, int w, int v [PES]);
    for (int j = 0; j < w; j++) begin
      logic [PES-1:0] word;
      for (int p = 0; p < PES; p++) word[p] = v[p][j];
      host_write(r, c, base + j, word);
    end
  endtask

  // read w-bit signed values of block (r,c) at base
  task automatic get_vec(int r, int c, int base, int w, output int v [PES]);
    logic [PES-1:0] word;
    for (int p = 0; p < PES; p++) v[p] = 0;
    for (int j = 0; j < w; j++) begin
      host_read(r, c, base + j, word);
      for (int p = 0; p < PES; p++) v[p] |= int'(word[p]) << j;
    end
    for (int p = 0; p < PES; p++) v[p] = (v[p] << (32 - w)) >>> (32 - w);
  endtask

  task automatic run(instr_op_e op, int dst, int s1, int s2, int w, int lvl, net_dir_e dir,
                     int exp_issue);
    @(negedge clk);
    instr = '{op: op, dst: ADDR_W'(dst), src1: ADDR_W'(s1), src2: ADDR_W'(s2),
              width: 6'(w), level: 3'(lvl), dir: dir};
    start = 1;
    run_cycles = 0;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (run_cycles != exp_issue) begin
      failures++;
      $display("FAIL %s issue cycles %0d expected %0d", op.name(), run_cycles, exp_issue);
    end
  endtask

  function automatic int sext(int v, int w);
    return (v << (32 - w)) >>> (32 - w);
  endfunction

  task automatic check_all(string what, int base, int w, int kind);
    int got [PES];
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        get_vec(r, c, base, w, got);
        for (int p = 0; p < PES; p++) begin
          int exp;
          case (kind)
            0: exp = sext(a[r][c][p] + b[r][c][p], w);
            1: exp = sext(a[r][c][p] - b[r][c][p], w);
            default: exp = sext(a[r][c][p] * b[r][c][p], w);
          endcase
          checks++;
          if (got[p] !== exp) begin
            failures++;
            if (failures < 10) $display("FAIL %s blk(%0d,%0d) pe%0d got %0d exp %0d", what, r, c, p, got[p], exp);
          end
        end
      end
  endtask

  initial begin
    int v [PES];
    int got [PES];
    int rowsum [ROWS];
    int total;
    instr = '0;
    for (int i = 0; i < 5; i++) n_fold[i] = 0;
    repeat (4) @(negedge clk);
    rst = 0;

    // -------- element-wise ADD / SUB / MULT on random 8-bit operands --------
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        for (int p = 0; p < PES; p++) begin
          a[r][c][p] = sext(int'($urandom_range(0, 255)), N);
          b[r][c][p] = sext(int'($urandom_range(0, 255)), N);
        end
        a[r][c][0] = -128; b[r][c][0] = -128;   // corner case of Booth
        a[r][c][1] = 127;  b[r][c][1] = -128;
        v = a[r][c]; put_vec(r, c, A0, N, v);
        v = b[r][c]; put_vec(r, c, B0, N, v);
      end
    run(OP_ADD, C0, A0, B0, N, 0, DIR_WEST, 2 * N);
    check_all("ADD", C0, N, 0);
    run(OP_SUB, D0, A0, B0, N, 0, DIR_WEST, 2 * N);
    check_all("SUB", D0, N, 1);
    run(OP_MULT, P0, A0, B0, N, 0, DIR_WEST, 2 * N * N + 4 * N);
    check_all("MULT", P0, 2 * N, 2);

    // -------- multiply-accumulate of 256 products --------
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        for (int p = 0; p < PES; p++) begin
          a[r][c][p] = sext(int'($urandom_range(0, 15)), 4);
          b[r][c][p] = sext(int'($urandom_range(0, 15)), 4);
        end
        v = a[r][c]; put_vec(r, c, E0, N, v);
        v = b[r][c]; put_vec(r, c, F0, N, v);
      end
    run(OP_MULT, Q0, E0, F0, N, 0, DIR_WEST, 2 * N * N + 4 * N);
    for (int f = 1; f <= 4; f++) run(OP_FOLD, Q0, Q0, 0, 2 * N, f, DIR_WEST, 2 * N + 1);
    // block sums in PE 0
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int s;
        s = 0;
        for (int p = 0; p < PES; p++) s += a[r][c][p] * b[r][c][p];
        get_vec(r, c, Q0, 2 * N, got);
        checks++;
        if (got[0] !== s) begin
          failures++;
          $display("FAIL fold blk(%0d,%0d) got %0d exp %0d", r, c, got[0], s);
        end
      end
    for (int l = 0; l < 2; l++) run(OP_NET, Q0, Q0, 0, 2 * N, l, DIR_WEST, 1 + (1 << l) + 2 * N);
    total = 0;
    for (int r = 0; r < ROWS; r++) begin
      rowsum[r] = 0;
      for (int c = 0; c < COLS; c++)
        for (int p = 0; p < PES; p++) rowsum[r] += a[r][c][p] * b[r][c][p];
      total += rowsum[r];
      get_vec(r, 0, Q0, 2 * N, got);
      checks++;
      if (got[0] !== rowsum[r]) begin
        failures++;
        $display("FAIL row %0d sum got %0d exp %0d", r, got[0], rowsum[r]);
      end
    end
    for (int l = 0; l < 2; l++) run(OP_NET, Q0, Q0, 0, 2 * N, l, DIR_NORTH, 1 + (1 << l) + 2 * N);
    get_vec(0, 0, Q0, 2 * N, got);
    checks++;
    if (got[0] !== total) begin
      failures++;
      $display("FAIL tile sum got %0d exp %0d", got[0], total);
    end
    $display("tile sum %0d, cycles %0d", total, cycles);

    // -------- mechanism coverage --------
    $display("booth add=%0d sub=%0d nop=%0d folds=%0d/%0d/%0d/%0d roles R=%0d T=%0d P=%0d suppressed=%0d hops=%0d",
             n_booth_add, n_booth_sub, n_booth_nop, n_fold[1], n_fold[2], n_fold[3], n_fold[4],
             n_role_r, n_role_t, n_role_p, n_net_suppr, n_hop);
    checks++; if (n_booth_add == 0) begin failures++; $display("FAIL no Booth +M step"); end
    checks++; if (n_booth_sub == 0) begin failures++; $display("FAIL no Booth -M step"); end
    checks++; if (n_booth_nop == 0) begin failures++; $display("FAIL no Booth no-op step"); end
    for (int f = 1; f <= 4; f++) begin
      checks++; if (n_fold[f] == 0) begin failures++; $display("FAIL fold %0d unused", f); end
    end
    checks++; if (n_role_r == 0) begin failures++; $display("FAIL no receiver"); end
    checks++; if (n_role_t == 0) begin failures++; $display("FAIL no transmitter"); end
    checks++; if (n_role_p == 0) begin failures++; $display("FAIL no pass-through"); end
    checks++; if (n_hop == 0) begin failures++; $display("FAIL no pass-through hop"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
