// tb_opmux: random test of all seven OpMux configurations for a 16-lane block.
// Expected operands are built lane by lane from the configuration table:
// fold f gives lane i < 16/2^f the A bit of lane i + 16/2^f, NET enters lane 0.
module tb_opmux;
  import picaso_pkg::*;
  mux_cfg_e cfg;
  logic [15:0] a, b, x, y;
  logic net;
  int checks = 0, failures = 0;

  opmux #(.W(16)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      for (int c = 0; c < 7; c++) begin
        logic [15:0] ex, ey;
        cfg = mux_cfg_e'(c);
        a = 16'($urandom);
        b = 16'($urandom);
        net = 1'($urandom);
        #1;
        ex = a;
        ey = '0;
        case (cfg)
          MUX_A_OP_B: ey = b;
          MUX_0_OP_B: begin ex = '0; ey = b; end
          MUX_A_OP_NET: ey[0] = net;
          default: begin
            int half;
            half = 16 >> int'(cfg);   // cfg 1..4 = fold level
            for (int i = 0; i < half; i++) ey[i] = a[half + i];
          end
        endcase
        checks++;
        if (x !== ex || y !== ey) begin
          failures++;
          $display("FAIL %s a=%h b=%h net=%b -> x=%h y=%h exp %h %h", cfg.name(), a, b, net, x, y, ex, ey);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
