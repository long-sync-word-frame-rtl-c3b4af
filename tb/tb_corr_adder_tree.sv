// tb_corr_adder_tree: drives random windows and syncwords (including exact
// matches and exact complements) into a default-size (300-bit) correlator
// and a 37-bit one, with random enable gaps. Each result is compared with a
// software count of equal bit positions, taken exactly ceil(log2 K) enabled
// clocks after the window was applied.
module tb_corr_adder_tree;

  localparam int K1 = fsync_pkg::SYNC_LEN_DEFAULT;
  localparam int K2 = 37;
  localparam int W1 = $clog2(K1 + 1), W2 = $clog2(K2 + 1);
  localparam int L1 = $clog2(K1), L2 = $clog2(K2);

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [K1-1:0] win1 = '0, sw1 = '0;
  logic [K2-1:0] win2 = '0, sw2 = '0;
  logic [W1-1:0] corr1;
  logic [W2-1:0] corr2;
  int checks = 0, failures = 0;
  int hist1[$], hist2[$];

  corr_adder_tree u1 (.clk, .rst_n, .en, .window(win1), .syncword(sw1), .corr(corr1));
  corr_adder_tree #(.K(K2)) u2 (.clk, .rst_n, .en, .window(win2), .syncword(sw2), .corr(corr2));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int matches1(logic [K1-1:0] a, logic [K1-1:0] b);
    int c = 0;
    for (int i = 0; i < K1; i++) c += (a[i] == b[i]) ? 1 : 0;
    return c;
  endfunction

  function automatic int matches2(logic [K2-1:0] a, logic [K2-1:0] b);
    int c = 0;
    for (int i = 0; i < K2; i++) c += (a[i] == b[i]) ? 1 : 0;
    return c;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 600; c++) begin
      en = ($urandom % 5) != 0;
      for (int i = 0; i < K1; i++) win1[i] = 1'($urandom);
      case ($urandom % 4)
        0: sw1 = win1;
        1: sw1 = ~win1;
        2: begin sw1 = win1; for (int i = 0; i < 60; i++) sw1[$urandom % K1] ^= 1'b1; end
        default: for (int i = 0; i < K1; i++) sw1[i] = 1'($urandom);
      endcase
      win2 = K2'({$urandom, $urandom});
      sw2  = (c % 7 == 0) ? win2 : K2'({$urandom, $urandom});
      @(negedge clk);
      if (en) begin
        hist1.push_back(matches1(win1, sw1));
        hist2.push_back(matches2(win2, sw2));
        if (hist1.size() >= L1) begin
          checks++;
          if (int'(corr1) != hist1[hist1.size() - L1]) begin
            failures++;
            if (failures < 5) $display("FAIL K=%0d: %0d expected %0d", K1, corr1, hist1[hist1.size() - L1]);
          end
        end
        if (hist2.size() >= L2) begin
          checks++;
          if (int'(corr2) != hist2[hist2.size() - L2]) begin
            failures++;
            if (failures < 5) $display("FAIL K=%0d: %0d expected %0d", K2, corr2, hist2[hist2.size() - L2]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
