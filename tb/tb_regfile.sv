// tb_regfile: random test of the dual-port register file (16 x 1024) against an
// array model: writes through port B, simultaneous reads on both ports, one
// cycle read latency, read-first on port B and holding of the outputs when idle.
module tb_regfile;
  localparam int W = 16, D = 1024;
  logic clk = 0;
  logic a_en = 0, b_en = 0, b_we = 0;
  logic [9:0] a_addr = '0, b_addr = '0;
  logic [W-1:0] b_din = '0, a_dout, b_dout;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  regfile #(.W(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] ea, eb;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      b_en = 1; b_we = 1; b_addr = 10'(i); b_din = W'($urandom);
      model[i] = b_din;
    end
    @(negedge clk);
    // prime both outputs so the hold behaviour can be checked from the start
    a_en = 1; a_addr = '0; b_en = 1; b_we = 0; b_addr = 10'd1;
    ea = model[0]; eb = model[1];
    @(negedge clk);
    a_en = 0; b_en = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      a_en = 1'($urandom); a_addr = 10'($urandom);
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = 10'($urandom); b_din = W'($urandom);
      ea = a_en ? model[a_addr] : ea;
      eb = b_en ? model[b_addr] : eb;
      if (b_en && b_we) model[b_addr] = b_din;
      @(negedge clk);
      checks++;
      if (a_dout !== ea || b_dout !== eb) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d a=%h exp %h b=%h exp %h", it, a_dout, ea, b_dout, eb);
      end
      a_en = 0; b_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
