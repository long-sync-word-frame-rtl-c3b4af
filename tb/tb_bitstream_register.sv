// tb_bitstream_register: feeds random blocks with random enable gaps into
// the bitstream register (default size, 300 + 15 - 1 bits) and after every
// clock compares its contents with the last K+M-1 bits of a reference
// history (zeros before the first bit), oldest bit at index 0.
module tb_bitstream_register;

  localparam int K = fsync_pkg::SYNC_LEN_DEFAULT;
  localparam int M = fsync_pkg::WINDOW_DEFAULT;
  localparam int W = K + M - 1;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [M-1:0] in_bits = '0;
  logic [W-1:0] win;
  int checks = 0, failures = 0;
  bit hist[$];

  bitstream_register dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expv;
    repeat (W) hist.push_back(1'b0);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 400; c++) begin
      en = ($urandom % 4) != 0;
      in_bits = M'($urandom);
      @(negedge clk);
      if (en) for (int b = 0; b < M; b++) hist.push_back(in_bits[b]);
      for (int i = 0; i < W; i++) expv[i] = hist[hist.size() - W + i];
      checks++;
      if (win !== expv) begin
        failures++;
        if (failures < 5) $display("FAIL at clock %0d: window differs", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
