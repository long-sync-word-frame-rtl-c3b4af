// threshold_detector: decides whether the best window holds the syncword.
//
// The maximum correlation value from the comparator tree is compared with
// the threshold. If it is strictly greater, det goes high for that enabled
// clock and det_pos carries the window position the maximum came from
// (the syncword then starts at bit det_pos of the corresponding window).
// One register stage: the decision appears one enabled clock after its
// inputs. The outputs hold while en is low.
//
// The comparison against a threshold follows the paper ("surpasses"/"above"
// the threshold, read here as strictly greater). The threshold is a run-time
// input so that one build serves several thresholds; that, the register and
// reset to "no detection" are this design's choices.
module threshold_detector #(
  parameter int unsigned VW = fsync_pkg::corr_width(fsync_pkg::SYNC_LEN_DEFAULT),
  parameter int unsigned IW = fsync_pkg::idx_width(fsync_pkg::WINDOW_DEFAULT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [VW-1:0] max_val,
  input  logic [IW-1:0] max_idx,
  input  logic [VW-1:0] threshold,
  output logic          det,
  output logic [IW-1:0] det_pos
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      det     <= 1'b0;
      det_pos <= '0;
    end else if (en) begin
      det     <= (max_val > threshold);
      det_pos <= max_idx;
    end
  end

endmodule
