// tb_workload_ber: the two evaluated link configurations over a sweep of
// channel bit error rates. A 300-bit syncword with threshold 210 (15 bits
// per clock) and a 500-bit syncword with threshold 350 (20 bits per clock),
// both with 3000-bit payloads, each receive 200 back-to-back frames through
// a binary symmetric channel at bit error rates of 20 %, 25 % and 28 %
// (six independent synchronizer instances run side by side). Every
// delivered payload word is checked against the bit-level reference model,
// and the frame synchronization error rate of each point is printed. The
// binary symmetric channel is a simple stand-in for a faded, noisy radio
// link; the error rates are chosen around the point where frames start to
// be lost.
module tb_workload_ber;

  localparam int unsigned N      = 3000;
  localparam int unsigned FRAMES = 200;
  localparam int unsigned NPTS   = 3;
  localparam int unsigned BER_PPM [NPTS] = '{200000, 250000, 280000};

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int unsigned K  = (g == 0) ? 300 : 500;
    localparam int unsigned M  = (g == 0) ? 15 : 20;
    localparam int unsigned T  = (g == 0) ? 210 : 350;
    localparam int unsigned VW = $clog2(K + 1);
    for (genvar p = 0; p < NPTS; p++) begin : g_pt
      logic          clk, rst_n, in_valid, busy, frame_start, det_dropped;
      logic          pl_valid, pl_first, pl_last;
      logic [M-1:0]  in_bits, pl_bits;
      logic [K-1:0]  syncword;
      logic [VW-1:0] threshold;

      frame_sync_top #(.K(K), .M(M), .N(N)) dut (.*);

      fsync_env #(.K(K), .M(M), .N(N), .THR(T), .NFRAMES(FRAMES), .BER_PPM(BER_PPM[p]),
                  .STALL_PCT(5), .SCENARIOS(1'b0), .SEED(3 + 10 * p + g), .MAX_CYCLES(120000),
                  .FINISH(1'b0)) env (.*);
    end
  end

  initial begin
    int checks, failures;
    wait (g_cfg[0].g_pt[0].env.finished && g_cfg[0].g_pt[1].env.finished &&
          g_cfg[0].g_pt[2].env.finished && g_cfg[1].g_pt[0].env.finished &&
          g_cfg[1].g_pt[1].env.finished && g_cfg[1].g_pt[2].env.finished);
    $display("bit error rate      20%%   25%%   28%%   (frames missed of %0d)", FRAMES);
    $display("300-bit syncword:  %4d  %4d  %4d", g_cfg[0].g_pt[0].env.n_missed,
             g_cfg[0].g_pt[1].env.n_missed, g_cfg[0].g_pt[2].env.n_missed);
    $display("500-bit syncword:  %4d  %4d  %4d", g_cfg[1].g_pt[0].env.n_missed,
             g_cfg[1].g_pt[1].env.n_missed, g_cfg[1].g_pt[2].env.n_missed);
    checks = g_cfg[0].g_pt[0].env.checks + g_cfg[0].g_pt[1].env.checks +
             g_cfg[0].g_pt[2].env.checks + g_cfg[1].g_pt[0].env.checks +
             g_cfg[1].g_pt[1].env.checks + g_cfg[1].g_pt[2].env.checks;
    failures = g_cfg[0].g_pt[0].env.failures + g_cfg[0].g_pt[1].env.failures +
               g_cfg[0].g_pt[2].env.failures + g_cfg[1].g_pt[0].env.failures +
               g_cfg[1].g_pt[1].env.failures + g_cfg[1].g_pt[2].env.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
