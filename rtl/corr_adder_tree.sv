// corr_adder_tree: digital correlation of one K-bit window with the syncword.
//
// Every bit of the window is compared with the syncword bit in the same
// position by an XNOR (1 when they are equal). The K match bits are summed by
// a binary adder tree: the leaves are padded with zeros to the next power of
// two, each level adds neighbours in pairs, and after log2 levels the root
// holds the number of matching bits, 0..K. Every level is registered, so the
// tree is fully pipelined: a new window is accepted each enabled clock and
// its sum appears LAT = ceil(log2(K)) enabled clocks later.
//
// The XNOR-and-sum correlation, the tree shape and the use of pipelining
// follow the paper. Registering every level (rather than every few levels)
// is this design's choice; each level is only as wide as its largest
// possible sum (l+1 bits at level l, capped at the output width). All registers
// advance only when en is high; asynchronous active-low reset clears them.
module corr_adder_tree #(
  parameter int unsigned K  = fsync_pkg::SYNC_LEN_DEFAULT,
  parameter int unsigned SW = fsync_pkg::corr_width(K)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [K-1:0]  window,
  input  logic [K-1:0]  syncword,
  output logic [SW-1:0] corr
);

  localparam int unsigned L = fsync_pkg::tree_levels(K);
  localparam int unsigned P = 1 << L;

  if (K < 2) begin : g_bad_size
    $error("corr_adder_tree needs K >= 2");
  end

  for (genvar l = 0; l <= L; l++) begin : g_lvl
    // a node at level l sums at most 2**l match bits, and never more than K
    localparam int unsigned LW = (l + 1 < SW) ? l + 1 : SW;
    logic [LW-1:0] s [P >> l];
    if (l == 0) begin : g_leaf
      for (genvar j = 0; j < P; j++) begin : g_xnor
        if (j < K) begin : g_bit
          assign s[j] = window[j] ~^ syncword[j];
        end else begin : g_pad
          assign s[j] = 1'b0;
        end
      end
    end else begin : g_add
      for (genvar j = 0; j < (P >> l); j++) begin : g_node
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n)  s[j] <= '0;
          else if (en) s[j] <= LW'(g_lvl[l-1].s[2*j]) + LW'(g_lvl[l-1].s[2*j+1]);
        end
      end
    end
  end

  assign corr = g_lvl[L].s[0];

endmodule
