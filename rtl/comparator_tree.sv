// comparator_tree: selects the largest of M correlation values.
//
// The tree has the same topology as the adder tree, with a comparator in
// place of each adder: every node passes on the larger of its two children
// together with the window position it came from. Leaves are padded to the
// next power of two with value 0; padding only ever sits to the right of real
// leaves, and a tie goes to the left child, so the result is the largest
// value at the lowest position that holds it. Every level is registered:
// the result appears LAT = ceil(log2(M)) enabled clocks after the inputs
// (0 for M = 1, in which case the tree is a wire).
//
// The comparator-tree structure is the paper's; the tie rule, the index that
// travels with the value and the per-level registers are this design's.
module comparator_tree #(
  parameter int unsigned M  = fsync_pkg::WINDOW_DEFAULT,
  parameter int unsigned VW = fsync_pkg::corr_width(fsync_pkg::SYNC_LEN_DEFAULT),
  parameter int unsigned IW = fsync_pkg::idx_width(M)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [M-1:0][VW-1:0]  vals,
  output logic [VW-1:0]         max_val,
  output logic [IW-1:0]         max_idx
);

  localparam int unsigned L = fsync_pkg::tree_levels(M);
  localparam int unsigned P = 1 << L;

  typedef struct packed {
    logic [VW-1:0] val;
    logic [IW-1:0] idx;
  } cand_t;

  function automatic cand_t pick(cand_t a, cand_t b);
    return (a.val >= b.val) ? a : b;
  endfunction

  for (genvar l = 0; l <= L; l++) begin : g_lvl
    cand_t c [P >> l];
    if (l == 0) begin : g_leaf
      for (genvar j = 0; j < P; j++) begin : g_in
        if (j < M) begin : g_val
          assign c[j] = '{val: vals[j], idx: IW'(j)};
        end else begin : g_pad
          assign c[j] = '{val: '0, idx: '0};
        end
      end
    end else begin : g_cmp
      for (genvar j = 0; j < (P >> l); j++) begin : g_node
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n)  c[j] <= '0;
          else if (en) c[j] <= pick(g_lvl[l-1].c[2*j], g_lvl[l-1].c[2*j+1]);
        end
      end
    end
  end

  assign max_val = g_lvl[L].c[0].val;
  assign max_idx = g_lvl[L].c[0].idx;

endmodule
