// tb_bs_alu: bit-serial ALU test. Random N-bit operand pairs are streamed LSB
// first after an op_load; the serial result is compared with integer ADD, SUB,
// CPX and CPY. Booth op_loads are checked by streaming a known pair and
// observing whether the ALU adds, subtracts or copies. Also checks that idle
// cycles (en low) between bits leave the carry alone, as in the 2-cycle-per-bit
// schedule.
module tb_bs_alu;
  import picaso_pkg::*;
  localparam int N = 12;
  logic clk = 0, rst = 1;
  logic [2:0] conf = '0;
  logic op_load = 0, en = 0, x = 0, y = 0, sum;
  int checks = 0, failures = 0;

  bs_alu dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // load with conf and operand bits (for Booth), then stream a, b; returns N-bit result
  task automatic serial(logic [2:0] c, logic lx, logic ly, int av, int bv, bit gaps, output int res);
    @(negedge clk);
    conf = c; op_load = 1; x = lx; y = ly;
    @(negedge clk);
    op_load = 0;
    res = 0;
    for (int k = 0; k < N; k++) begin
      en = 1; x = av[k]; y = bv[k];
      #1 res |= int'(sum) << k;
      @(negedge clk);
      en = 0;
      if (gaps) begin x = ~x; y = ~y; @(negedge clk); end
    end
  endtask

  initial begin
    int av, bv, res, mask;
    mask = (1 << N) - 1;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int it = 0; it < 200; it++) begin
      av = int'($urandom_range(0, mask));
      bv = int'($urandom_range(0, mask));
      serial(CONF_ADD, 0, 0, av, bv, it[0], res);
      checks++; if (res != ((av + bv) & mask)) begin failures++; $display("FAIL ADD %0d %0d -> %0d", av, bv, res); end
      serial(CONF_SUB, 0, 0, av, bv, it[0], res);
      checks++; if (res != ((av - bv) & mask)) begin failures++; $display("FAIL SUB %0d %0d -> %0d", av, bv, res); end
      serial(CONF_CPX, 0, 0, av, bv, 0, res);
      checks++; if (res != av) begin failures++; $display("FAIL CPX"); end
      serial(CONF_CPY, 0, 0, av, bv, 0, res);
      checks++; if (res != bv) begin failures++; $display("FAIL CPY"); end
    end
    // Booth recoding: YX = 01 -> add, 10 -> subtract, 00/11 -> copy X
    av = 1234; bv = 567;
    serial(CONF_BOOTH, 1, 0, av, bv, 1, res);
    checks++; if (res != ((av + bv) & mask)) begin failures++; $display("FAIL Booth +Y"); end
    serial(CONF_BOOTH, 0, 1, av, bv, 1, res);
    checks++; if (res != ((av - bv) & mask)) begin failures++; $display("FAIL Booth -Y"); end
    serial(CONF_BOOTH, 0, 0, av, bv, 1, res);
    checks++; if (res != av) begin failures++; $display("FAIL Booth nop 00"); end
    serial(CONF_BOOTH, 1, 1, av, bv, 1, res);
    checks++; if (res != av) begin failures++; $display("FAIL Booth nop 11"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
