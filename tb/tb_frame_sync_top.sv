// tb_frame_sync_top: end-to-end test of the frame synchronizer at reduced
// size (128-bit syncword, threshold 90 = 70 %, 8 bits per clock, 256-bit
// payload). Eight frames with the directed cases of fsync_env: a syncword
// just above the threshold, one exactly at it, one far below it, a syncword
// copy inside a payload, noise gaps between frames and random input stalls.
// Every payload word, its flags and its clock are compared with the
// bit-level reference model.
module tb_frame_sync_top;

  localparam int unsigned K = 128;
  localparam int unsigned M = 8;
  localparam int unsigned N = 256;
  localparam int unsigned VW = $clog2(K + 1);

  logic          clk, rst_n, in_valid;
  logic [M-1:0]  in_bits;
  logic [K-1:0]  syncword;
  logic [VW-1:0] threshold;
  logic          busy, frame_start, det_dropped, pl_valid, pl_first, pl_last;
  logic [M-1:0]  pl_bits;

  frame_sync_top #(.K(K), .M(M), .N(N)) dut (.*);

  fsync_env #(.K(K), .M(M), .N(N), .THR(90), .NFRAMES(8), .STALL_PCT(15),
              .SEED(7), .MAX_CYCLES(200000)) env (.*);

endmodule
