// tb_picaso_ctrl: checks the micro-operation stream of the sequencer (Full-Pipe,
// read-to-write latency 4) for each instruction type, without a datapath:
//  * issue-phase length: 2N (ADD/SUB/CPX/CPY), 2N^2+4N (MULT), N+1 (FOLD),
//    1+2^L+N (NET level L);
//  * number of ALU bit operations and of writes, and the set of written addresses;
//  * write timing: 5 cycles after the read for two-operand instructions (never in
//    a cycle that reads port B), 4 cycles for FOLD and NET;
//  * NET: the level/direction broadcast in the first cycle, receiver reads 2^L
//    cycles after transmitter reads, writes flagged as receiver-only;
//  * MULT: N Booth op-code loads with Conf 1xx.
module tb_picaso_ctrl;
  import picaso_pkg::*;
  logic clk = 0, rst = 1, start = 0, busy, done;
  instr_t instr;
  uop_t uop;
  net_cfg_t net_cfg;
  int checks = 0, failures = 0;

  picaso_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event log of one instruction
  int cyc, issue, n_alu, n_wr, n_booth, n_cfg, n_wr_net, n_bad_port;
  int rd_cyc [$], wr_cyc [$], tx_cyc [$];
  bit wr_seen [1024];
  always @(posedge clk) begin
    if (busy) begin
      cyc++;
      if (dut.state == 2'd1) issue++;
      if (uop.ex.alu_en) begin n_alu++; rd_cyc.push_back(cyc); end
      if (uop.tx_en) tx_cyc.push_back(cyc);
      if (uop.wr_en) begin n_wr++; wr_cyc.push_back(cyc); wr_seen[uop.wr_addr] = 1; if (uop.wr_net) n_wr_net++; end
      if (uop.wr_en && uop.rdb_en) n_bad_port++;
      if (uop.ex.op_load && uop.ex.conf[2]) n_booth++;
      if (net_cfg.we) n_cfg++;
    end
  end

  task automatic exp_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
  endtask

  task automatic run(instr_op_e op, int w, int lvl, int dst);
    @(negedge clk);
    cyc = 0; issue = 0; n_alu = 0; n_wr = 0; n_booth = 0; n_cfg = 0; n_wr_net = 0; n_bad_port = 0;
    rd_cyc.delete(); wr_cyc.delete(); tx_cyc.delete();
    for (int i = 0; i < 1024; i++) wr_seen[i] = 0;
    instr = '{op: op, dst: ADDR_W'(dst), src1: 10'd100, src2: 10'd200, width: 6'(w), level: 3'(lvl), dir: DIR_WEST};
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic check_writes(int dst, int cnt, int delay, int n_exp = -1);
    int ok;
    exp_eq("writes", n_wr, (n_exp < 0) ? cnt : n_exp);
    ok = 1;
    for (int i = 0; i < cnt; i++) if (!wr_seen[dst + i]) ok = 0;
    exp_eq("written addresses", ok, 1);
    if (rd_cyc.size() == wr_cyc.size() && delay > 0)
      for (int i = 0; i < rd_cyc.size(); i++) exp_eq("write delay", wr_cyc[i] - rd_cyc[i], delay);
  endtask

  initial begin
    instr = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int w = 4; w <= 16; w += 6) begin
      run(OP_ADD, w, 0, 300);
      exp_eq("ADD issue", issue, 2 * w);
      exp_eq("ADD alu bits", n_alu, w);
      check_writes(300, w, 5);
      exp_eq("ADD port B conflicts", n_bad_port, 0);
      run(OP_SUB, w, 0, 300);
      exp_eq("SUB issue", issue, 2 * w);
      run(OP_MULT, w, 0, 400);
      exp_eq("MULT issue", issue, 2 * w * w + 4 * w);
      exp_eq("MULT alu bits", n_alu, w * (w + 1));
      exp_eq("MULT booth loads", n_booth, w);
      exp_eq("MULT port B conflicts", n_bad_port, 0);
      check_writes(400, 2 * w, 5, w * (w + 1));
      for (int f = 1; f <= 4; f++) begin
        run(OP_FOLD, w, f, 500);
        exp_eq("FOLD issue", issue, w + 1);
        check_writes(500, w, 4);
      end
      for (int l = 0; l < 4; l++) begin
        run(OP_NET, w, l, 600);
        exp_eq("NET issue", issue, 1 + (1 << l) + w);
        exp_eq("NET cfg writes", n_cfg, 1);
        exp_eq("NET receiver-only writes", n_wr_net, w);
        exp_eq("NET tx reads", tx_cyc.size(), w);
        exp_eq("NET rx offset", rd_cyc[0] - tx_cyc[0], 1 << l);
        check_writes(600, w, 4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
