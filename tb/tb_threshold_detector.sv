// tb_threshold_detector: random maxima around the threshold (below, equal,
// one above, far above) and random thresholds, with random enable gaps.
// After each enabled clock det must equal (max > threshold) and det_pos the
// position presented with it; on a disabled clock both must hold.
module tb_threshold_detector;

  localparam int VW = fsync_pkg::corr_width(fsync_pkg::SYNC_LEN_DEFAULT);
  localparam int IW = fsync_pkg::idx_width(fsync_pkg::WINDOW_DEFAULT);

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [VW-1:0] max_val = '0, threshold = '0;
  logic [IW-1:0] max_idx = '0;
  logic det;
  logic [IW-1:0] det_pos;
  int checks = 0, failures = 0;
  int n_det = 0, n_equal = 0;

  threshold_detector dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_det;
    logic [IW-1:0] exp_pos;
    exp_det = 1'b0;
    exp_pos = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 1000; c++) begin
      int d;
      en = ($urandom % 4) != 0;
      threshold = (c % 2) ? VW'(fsync_pkg::THRESHOLD_DEFAULT) : VW'($urandom % 300);
      d = int'($urandom % 7) - 3;
      if (c % 9 == 0) d = 50;
      max_val = VW'((int'(threshold) + d < 0) ? 0 : int'(threshold) + d);
      max_idx = IW'($urandom % fsync_pkg::WINDOW_DEFAULT);
      if (en) begin
        exp_det = max_val > threshold;
        exp_pos = max_idx;
        if (max_val == threshold) n_equal++;
        if (exp_det) n_det++;
      end
      @(negedge clk);
      checks++;
      if (det !== exp_det || det_pos !== exp_pos) begin
        failures++;
        if (failures < 5) $display("FAIL clock %0d: det=%0d pos=%0d expected %0d/%0d", c, det, det_pos, exp_det, exp_pos);
      end
    end
    checks++;
    if (n_det == 0 || n_equal == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
