// tb_frame_sync_full: the frame synchronizer at its default size (300-bit
// syncword, threshold 210, 15 bits per clock, 3000-bit payload) receiving
// eight frames with the directed cases of fsync_env (syncword at threshold+1,
// at the threshold, far below it, syncword copy in a payload), noise gaps
// and random stalls. Checked word by word against the bit-level model.
module tb_frame_sync_full;

  localparam int unsigned K  = fsync_pkg::SYNC_LEN_DEFAULT;
  localparam int unsigned M  = fsync_pkg::WINDOW_DEFAULT;
  localparam int unsigned N  = fsync_pkg::PAYLOAD_LEN_DEFAULT;
  localparam int unsigned VW = fsync_pkg::corr_width(K);

  logic          clk, rst_n, in_valid;
  logic [M-1:0]  in_bits;
  logic [K-1:0]  syncword;
  logic [VW-1:0] threshold;
  logic          busy, frame_start, det_dropped, pl_valid, pl_first, pl_last;
  logic [M-1:0]  pl_bits;

  frame_sync_top dut (.*);

  fsync_env #(.K(K), .M(M), .N(N), .THR(fsync_pkg::THRESHOLD_DEFAULT),
              .NFRAMES(8), .STALL_PCT(10), .SEED(11), .MAX_CYCLES(400000)) env (.*);

endmodule
