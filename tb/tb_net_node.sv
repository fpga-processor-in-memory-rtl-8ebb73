// tb_net_node: eight network nodes in a row (and a 4-node column) wired as in the
// mesh. Checks the receiver/transmitter/pass-through pattern of levels 0, 1 and 2
// against the 8-node patterns of the paper's hopping figure (R T R T R T R T /
// R P T P R P T P / R P P P T P P P), the column and reversed directions, and
// that a random bit stream put on the register-file input of each transmitter
// appears on NET of its receiver exactly 2^L cycles later.
module tb_net_node;
  import picaso_pkg::*;
  localparam int C = 8, R = 4;
  logic clk = 0, rst = 1;
  net_cfg_t cfg = '0;
  logic      rf  [C];
  logic      tx  [C];
  logic      net [C];
  net_role_e role [C];
  logic      ctx [R];
  logic      cnet [R];
  logic      crf [R];
  net_role_e crole [R];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar c = 0; c < C; c++) begin : g_row
    net_node #(.ROW(0), .COL(c), .ROWS(1), .COLS(C)) u_n (
      .clk, .rst, .cfg,
      .rx_n(1'b0), .rx_s(1'b0),
      .rx_w((c > 0) ? tx[(c > 0) ? c - 1 : 0] : 1'b0),
      .rx_e((c < C - 1) ? tx[(c < C - 1) ? c + 1 : c] : 1'b0),
      .rf_bit(rf[c]), .tx(tx[c]), .net(net[c]), .role(role[c]));
  end
  for (genvar r = 0; r < R; r++) begin : g_col
    net_node #(.ROW(r), .COL(0), .ROWS(R), .COLS(1)) u_n (
      .clk, .rst, .cfg,
      .rx_n((r > 0) ? ctx[(r > 0) ? r - 1 : 0] : 1'b0),
      .rx_s((r < R - 1) ? ctx[(r < R - 1) ? r + 1 : r] : 1'b0),
      .rx_w(1'b0), .rx_e(1'b0),
      .rf_bit(crf[r]), .tx(ctx[r]), .net(cnet[r]), .role(crole[r]));
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic string pat();
    string s = "";
    for (int c = 0; c < C; c++) s = {s, (role[c] == ROLE_R) ? "R" : (role[c] == ROLE_T) ? "T" : "P"};
    return s;
  endfunction

  task automatic set(int lvl, net_dir_e d);
    @(negedge clk);
    cfg = '{we: 1'b1, level: 3'(lvl), dir: d};
    @(negedge clk);
    cfg.we = 0;
  endtask

  initial begin
    string exp_pat [3] = '{"RTRTRTRT", "RPTPRPTP", "RPPPTPPP"};
    for (int c = 0; c < C; c++) rf[c] = 0;
    for (int r = 0; r < R; r++) crf[r] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int l = 0; l < 3; l++) begin
      logic [63:0] stream;
      int d;
      set(l, DIR_WEST);
      checks++;
      if (pat() != exp_pat[l]) begin failures++; $display("FAIL level %0d pattern %s exp %s", l, pat(), exp_pat[l]); end
      // stream random bits from every transmitter, check at receivers 2^l cycles later
      d = 1 << l;
      stream = {$urandom, $urandom};
      for (int k = 0; k < 40; k++) begin
        for (int c = 0; c < C; c++) rf[c] = (role[c] == ROLE_T) ? stream[k] : 1'($urandom);
        @(negedge clk);
        if (k >= d) begin
          for (int c = 0; c < C; c += 2 * d) begin
            checks++;
            if (net[c] !== stream[k - d + 1]) begin
              failures++;
              $display("FAIL level %0d node %0d bit %0d", l, c, k - d + 1);
            end
          end
        end
      end
    end
    // reversed (eastward) reduction at level 1: receivers at 7 and 3
    set(1, DIR_EAST);
    checks++;
    if (pat() != "PTPRPTPR") begin failures++; $display("FAIL east pattern %s", pat()); end
    // column reduction, level 0 and 1
    set(0, DIR_NORTH);
    checks++;
    if (!(crole[0] == ROLE_R && crole[1] == ROLE_T && crole[2] == ROLE_R && crole[3] == ROLE_T)) begin
      failures++; $display("FAIL north level 0 roles");
    end
    for (int k = 0; k < 20; k++) begin
      logic bit1;
      bit1 = 1'($urandom);
      crf[1] = bit1;
      @(negedge clk);
      checks++;
      if (cnet[0] !== bit1) begin failures++; $display("FAIL north hop"); end
    end
    set(1, DIR_NORTH);
    checks++;
    if (!(crole[0] == ROLE_R && crole[1] == ROLE_P && crole[2] == ROLE_T && crole[3] == ROLE_P)) begin
      failures++; $display("FAIL north level 1 roles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
