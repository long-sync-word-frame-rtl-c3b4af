// tb_payload_capture: a random stream of 4-bit blocks (random enable gaps)
// with detections at random blocks and positions, into a capture unit with
// a 12-bit payload (3 words). The reference works on bit indices: a
// detection at block t, position p that arrives while no capture is running
// starts a payload at bit 4t+p+1, and payload word j must leave on the
// enabled clock that presents block t+j+1, holding bits 4t+p+1+4j .. +3.
// Detections during a capture must pulse det_dropped and change nothing.
// Also checks frame_start, pl_first/pl_last and busy.
module tb_payload_capture;

  localparam int M = 4;
  localparam int N = 12;
  localparam int NW = N / M;
  localparam int IW = 2;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic det = 1'b0;
  logic [IW-1:0] det_pos = '0;
  logic [M-1:0] blk = '0;
  logic busy, frame_start, det_dropped, pl_valid, pl_first, pl_last;
  logic [M-1:0] pl_bits;
  int checks = 0, failures = 0;
  int n_frames = 0, n_dropped = 0, n_off_m = 0;

  payload_capture #(.M(M), .N(N), .IW(IW)) dut (.*);

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

  initial run();

  task automatic run();
    bit bits[$];
    int t = 0;            // index of the block being presented
    int busy_until = -1;  // last block index during which a capture is running
    int p0 = 0;           // payload start bit of the running capture
    int acc_t = 0;        // block index of the accepting detection
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 1500; c++) begin
      bit exp_start, exp_drop, exp_valid, exp_first, exp_last, exp_busy;
      logic [M-1:0] exp_bits;
      en = ($urandom % 4) != 0;
      blk = M'($urandom);
      det = ($urandom % 6) == 0;
      det_pos = IW'($urandom);
      exp_start = 1'b0; exp_drop = 1'b0; exp_valid = 1'b0;
      exp_first = 1'b0; exp_last = 1'b0; exp_bits = '0;
      if (en) begin
        for (int b = 0; b < M; b++) bits.push_back(blk[b]);
        if (t <= busy_until && t > acc_t) begin
          // a capture is running: emit word t-acc_t-1
          int j = t - acc_t - 1;
          exp_valid = 1'b1;
          for (int b = 0; b < M; b++) exp_bits[b] = bits[p0 + j * M + b];
          exp_first = (j == 0);
          exp_last  = (j == NW - 1);
          exp_drop  = det;
        end else if (det) begin
          exp_start  = 1'b1;
          acc_t      = t;
          p0         = t * M + int'(det_pos) + 1;
          busy_until = t + NW;
          if (det_pos == IW'(M - 1)) n_off_m++;
        end
        exp_busy = (t < busy_until);
        t++;
      end
      @(negedge clk);
      if (en) begin
        check(frame_start == exp_start, $sformatf("frame_start %0d expected %0d at block %0d", frame_start, exp_start, t - 1));
        check(det_dropped == exp_drop, "det_dropped");
        check(pl_valid == exp_valid, $sformatf("pl_valid %0d expected %0d at block %0d", pl_valid, exp_valid, t - 1));
        if (exp_valid)
          check(pl_bits == exp_bits && pl_first == exp_first && pl_last == exp_last,
                $sformatf("word %h f%0d l%0d expected %h f%0d l%0d", pl_bits, pl_first, pl_last,
                          exp_bits, exp_first, exp_last));
        check(busy == exp_busy, "busy");
        n_frames += exp_start;
        n_dropped += exp_drop;
      end else begin
        check(!pl_valid && !frame_start && !det_dropped, "pulse on a disabled clock");
      end
    end
    check(n_frames > 10 && n_dropped > 3 && n_off_m > 0, "coverage of starts, drops, offset M");
    $display("frames %0d dropped %0d", n_frames, n_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

endmodule
