// payload_capture: extracts the payload that follows a detected syncword.
//
// Input is the bitstream, M bits per enabled clock, already delayed so that
// the block on blk is the one in which the detected syncword ended, in step
// with det/det_pos from the threshold detector. A detection at window
// position p means the syncword's last bit is blk[p] and the payload begins
// at bit offset p+1 of that block (offset M: at the start of the next block).
//
// On an accepted detection the block records the offset, pulses frame_start
// and becomes busy for NW = N/M words. Each following enabled clock it joins
// the previous and the current block and shifts out the M bits that start at
// the offset, so payload word j holds payload bits jM .. jM+M-1, bit 0 the
// earliest. Word j leaves one enabled clock after the block holding its last
// bit arrived; pl_first/pl_last mark the first and last word of a frame.
// While busy, further detections are ignored (det_dropped pulses): with a
// long random syncword they can only be false detections inside the payload.
// Outputs are registered; pl_valid, frame_start and det_dropped are high for
// one clock and only on enabled clocks.
//
// The paper says only that a detection starts the payload capture and the
// payload is extracted; the word-by-word alignment, the fixed payload length
// N (a multiple of M) and ignoring detections during capture are this
// design's choices.
module payload_capture #(
  parameter int unsigned M  = fsync_pkg::WINDOW_DEFAULT,
  parameter int unsigned N  = fsync_pkg::PAYLOAD_LEN_DEFAULT,
  parameter int unsigned IW = fsync_pkg::idx_width(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          det,
  input  logic [IW-1:0] det_pos,
  input  logic [M-1:0]  blk,
  output logic          busy,
  output logic          frame_start,
  output logic          det_dropped,
  output logic          pl_valid,
  output logic          pl_first,
  output logic          pl_last,
  output logic [M-1:0]  pl_bits
);

  localparam int unsigned NW  = N / M;
  localparam int unsigned CW  = $clog2(NW + 1);
  localparam int unsigned OW  = $clog2(2 * M);

  if (N % M != 0 || NW < 1) begin : g_bad_size
    $error("payload_capture needs N to be a positive multiple of M");
  end

  logic [M-1:0]    prev;
  logic [OW-1:0]   off;
  logic [CW-1:0]   left;
  logic            first;
  logic [2*M-1:0]  pair;

  assign pair = {blk, prev};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev        <= '0;
      off         <= '0;
      left        <= '0;
      busy        <= 1'b0;
      first       <= 1'b0;
      frame_start <= 1'b0;
      det_dropped <= 1'b0;
      pl_valid    <= 1'b0;
      pl_first    <= 1'b0;
      pl_last     <= 1'b0;
      pl_bits     <= '0;
    end else if (en) begin
      prev        <= blk;
      frame_start <= 1'b0;
      det_dropped <= 1'b0;
      pl_valid    <= 1'b0;
      pl_first    <= 1'b0;
      pl_last     <= 1'b0;
      if (busy) begin
        pl_valid <= 1'b1;
        pl_bits  <= pair[off +: M];
        pl_first <= first;
        pl_last  <= (left == CW'(1));
        first    <= 1'b0;
        left     <= left - CW'(1);
        if (left == CW'(1)) busy <= 1'b0;
        det_dropped <= det;
      end else if (det) begin
        busy        <= 1'b1;
        first       <= 1'b1;
        off         <= OW'(det_pos) + OW'(1);
        left        <= CW'(NW);
        frame_start <= 1'b1;
      end
    end else begin
      frame_start <= 1'b0;
      det_dropped <= 1'b0;
      pl_valid    <= 1'b0;
      pl_first    <= 1'b0;
      pl_last     <= 1'b0;
    end
  end

  // A capture never runs past its word count.
  a_left_nonzero_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> left != '0);

endmodule
