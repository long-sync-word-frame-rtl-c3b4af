// bitstream_register: the buffer the sliding-window correlator looks into.
//
// Each enabled clock M new bits of the demodulated stream are shifted in.
// The register keeps the last K+M-1 bits, which is exactly enough for the M
// parallel adder trees to see every K-bit window whose last bit arrived in
// the newest block: window position i is win[i +: K].
//
// Bit order: in_bits[0] is the earliest of the M new bits. In win, bit 0 is
// the oldest bit held and bit K+M-2 the newest, so the new block lands in
// win[K+M-2 -: M]. The register updates on the clock edge where en is high
// and holds otherwise (en is the input-valid of the stream). Asynchronous
// active-low reset clears it to zeros.
//
// The paper describes the register as a buffer for the bitstream that the
// parallel adder trees read; its length, bit order and the enable are this
// design's own choices.
module bitstream_register #(
  parameter int unsigned K = fsync_pkg::SYNC_LEN_DEFAULT,
  parameter int unsigned M = fsync_pkg::WINDOW_DEFAULT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [M-1:0]     in_bits,
  output logic [K+M-2:0]   win
);

  localparam int unsigned W = K + M - 1;

  if (K < 2 || M < 1) begin : g_bad_size
    $error("bitstream_register needs K >= 2 and M >= 1");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  win <= '0;
    else if (en) win <= {in_bits, win[W-1:M]};
  end

endmodule
