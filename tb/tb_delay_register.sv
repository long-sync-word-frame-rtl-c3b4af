// tb_delay_register: random words with random enable gaps through a
// 15-bit, 14-stage delay line (the depth the default frame synchronizer
// uses) and a zero-stage one. The output must equal the word applied
// D enabled clocks earlier (zero before that, after reset).
module tb_delay_register;

  localparam int W = fsync_pkg::WINDOW_DEFAULT;
  localparam int D = 14;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [W-1:0] d = '0, q, q0;
  int checks = 0, failures = 0;
  logic [W-1:0] hist[$];

  delay_register #(.W(W), .D(D)) dut (.*);
  delay_register #(.W(W), .D(0)) dut0 (.clk, .rst_n, .en, .d, .q(q0));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (D) hist.push_back('0);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 600; c++) begin
      en = ($urandom % 3) != 0;
      d  = W'($urandom);
      #1;
      checks++;
      if (q0 !== d) failures++;
      @(negedge clk);
      if (en) hist.push_back(d);
      checks++;
      if (q !== hist[hist.size() - D]) begin
        failures++;
        if (failures < 5) $display("FAIL clock %0d: %h expected %h", c, q, hist[hist.size() - D]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
