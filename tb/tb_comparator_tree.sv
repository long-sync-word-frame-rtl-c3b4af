// tb_comparator_tree: random sets of 15 correlation values (often with
// repeated maxima, sometimes all equal) go into the default-size comparator
// tree with random enable gaps. The maximum and the lowest position holding
// it are computed in software and compared with the tree's output
// ceil(log2 15) = 4 enabled clocks later. A 1-input and a 5-input tree are
// checked the same way.
module tb_comparator_tree;

  localparam int M  = fsync_pkg::WINDOW_DEFAULT;
  localparam int VW = fsync_pkg::corr_width(fsync_pkg::SYNC_LEN_DEFAULT);
  localparam int IW = fsync_pkg::idx_width(M);
  localparam int L  = $clog2(M);
  localparam int M5 = 5, L5 = 3;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [M-1:0][VW-1:0] vals = '0;
  logic [VW-1:0] max_val;
  logic [IW-1:0] max_idx;
  logic [M5-1:0][VW-1:0] vals5 = '0;
  logic [VW-1:0] max5;
  logic [2:0]    idx5;
  logic [0:0][VW-1:0] vals1 = '0;
  logic [VW-1:0] max1;
  logic [0:0]    idx1;
  int checks = 0, failures = 0;
  int ev[$], ei[$], ev5[$], ei5[$];

  comparator_tree dut (.*);
  comparator_tree #(.M(M5), .VW(VW), .IW(3)) dut5 (.clk, .rst_n, .en, .vals(vals5), .max_val(max5), .max_idx(idx5));
  comparator_tree #(.M(1), .VW(VW), .IW(1)) dut1 (.clk, .rst_n, .en, .vals(vals1), .max_val(max1), .max_idx(idx1));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 6) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 800; c++) begin
      int bv, bi, bv5, bi5, range;
      en = ($urandom % 4) != 0;
      range = (c % 5 == 0) ? 1 : ((c % 3 == 0) ? 4 : 301);
      for (int i = 0; i < M; i++) vals[i] = VW'($urandom % range + 150 * (c % 2));
      for (int i = 0; i < M5; i++) vals5[i] = VW'($urandom % range);
      vals1[0] = VW'($urandom % 301);
      bv = -1; bi = 0;
      for (int i = 0; i < M; i++) if (int'(vals[i]) > bv) begin bv = int'(vals[i]); bi = i; end
      bv5 = -1; bi5 = 0;
      for (int i = 0; i < M5; i++) if (int'(vals5[i]) > bv5) begin bv5 = int'(vals5[i]); bi5 = i; end
      @(negedge clk);
      // the single-input tree is a wire
      check(max1 == vals1[0] && idx1 == 1'b0, "1-input tree");
      if (en) begin
        ev.push_back(bv); ei.push_back(bi);
        ev5.push_back(bv5); ei5.push_back(bi5);
        if (ev.size() >= L)
          check(int'(max_val) == ev[ev.size() - L] && int'(max_idx) == ei[ei.size() - L],
                $sformatf("15-input: %0d@%0d expected %0d@%0d", max_val, max_idx,
                          ev[ev.size() - L], ei[ei.size() - L]));
        if (ev5.size() >= L5)
          check(int'(max5) == ev5[ev5.size() - L5] && int'(idx5) == ei5[ei5.size() - L5],
                $sformatf("5-input: %0d@%0d expected %0d@%0d", max5, idx5,
                          ev5[ev5.size() - L5], ei5[ei5.size() - L5]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
