// frame_sync_top: long-syncword frame synchronizer with payload capture.
//
// The demodulated bitstream enters M bits per clock (in_valid qualifies a
// block; every register in the design advances only on valid clocks, so a
// gap in the stream simply stalls the pipeline). The bitstream register keeps
// the last K+M-1 bits, and M parallel adder trees correlate the K-bit windows
// at all M new positions with the syncword (XNOR + popcount). A comparator
// tree picks the largest of the M correlation values and its position; if it
// is greater than the threshold, a syncword has been found ending in that
// position. The stream itself runs through a delay register whose depth
// equals the latency of that decision, so the payload capture unit sees the
// detection together with the block it refers to, and shifts out the N
// payload bits that follow the syncword, M bits per word.
//
// Throughput: M bits per clock (M = 15 and an assumed 250 MHz clock gives
// 3.75 Gbit/s). Decision latency DLAT = ceil(log2 K) + ceil(log2 M) + 1
// valid clocks after the block holding the syncword's last bit entered the
// bitstream register; the first payload word follows one valid clock after
// the block holding its last bit has been through the delay register.
//
// Interface: syncword[0] is the first transmitted bit of the syncword,
// in_bits[0] the earliest bit of a block and pl_bits[0] the earliest payload
// bit of a word. syncword and threshold are configuration inputs, to be held
// stable while frames are received (the syncword is fixed for many frames).
//
// The structure (bitstream register, parallel adder trees, comparator tree,
// threshold, delay register for payload capture) is the paper's. The window
// width M, payload length N, full pipelining, bit order, enable and the rule
// that detections are ignored during a capture are this design's choices.
module frame_sync_top #(
  parameter int unsigned K = fsync_pkg::SYNC_LEN_DEFAULT,
  parameter int unsigned M = fsync_pkg::WINDOW_DEFAULT,
  parameter int unsigned N = fsync_pkg::PAYLOAD_LEN_DEFAULT,
  parameter int unsigned VW = fsync_pkg::corr_width(K),
  parameter int unsigned IW = fsync_pkg::idx_width(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [M-1:0]  in_bits,
  input  logic [K-1:0]  syncword,
  input  logic [VW-1:0] threshold,
  output logic          busy,
  output logic          frame_start,
  output logic          det_dropped,
  output logic          pl_valid,
  output logic          pl_first,
  output logic          pl_last,
  output logic [M-1:0]  pl_bits
);

  localparam int unsigned W    = K + M - 1;
  localparam int unsigned DLAT = fsync_pkg::tree_levels(K) + fsync_pkg::tree_levels(M) + 1;

  logic [W-1:0]         win;
  logic [M-1:0][VW-1:0] corr;
  logic [VW-1:0]        max_val;
  logic [IW-1:0]        max_idx;
  logic                 det;
  logic [IW-1:0]        det_pos;
  logic [M-1:0]         blk_dly;

  bitstream_register #(.K(K), .M(M)) u_bitreg (
    .clk, .rst_n, .en(in_valid), .in_bits, .win
  );

  for (genvar i = 0; i < M; i++) begin : g_tree
    corr_adder_tree #(.K(K), .SW(VW)) u_tree (
      .clk, .rst_n, .en(in_valid),
      .window  (win[i +: K]),
      .syncword(syncword),
      .corr    (corr[i])
    );
  end

  comparator_tree #(.M(M), .VW(VW), .IW(IW)) u_tc (
    .clk, .rst_n, .en(in_valid), .vals(corr), .max_val, .max_idx
  );

  threshold_detector #(.VW(VW), .IW(IW)) u_thr (
    .clk, .rst_n, .en(in_valid), .max_val, .max_idx, .threshold, .det, .det_pos
  );

  delay_register #(.W(M), .D(DLAT)) u_dly (
    .clk, .rst_n, .en(in_valid), .d(win[W-1 -: M]), .q(blk_dly)
  );

  payload_capture #(.M(M), .N(N), .IW(IW)) u_cap (
    .clk, .rst_n, .en(in_valid), .det, .det_pos, .blk(blk_dly),
    .busy, .frame_start, .det_dropped, .pl_valid, .pl_first, .pl_last, .pl_bits
  );

endmodule
