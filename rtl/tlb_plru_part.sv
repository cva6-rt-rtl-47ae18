// tlb_plru_part: tree pseudo-LRU victim selection restricted to a set of
// allowed entries.
//
// A binary tree of ENTRIES-1 bits (heap order: node n has children 2n+1 and
// 2n+2) points at the least recently used half below every node. Touching an
// entry (hit or fill) makes every node on its path point away from it. To
// choose a victim the tree is walked from the root; at every node the walk
// follows the PLRU bit unless the subtree it points to holds no allowed entry,
// in which case it takes the other subtree. Partitions and locked entries are
// applied by the caller through allowed_i, so disjoint partitions never pick
// each other's entries. Before the tree is consulted, the lowest allowed entry
// that is invalid is preferred, as in the original CVA6 TLB.
//
// Timing: repl_idx_o/repl_valid_o are combinational from allowed_i, valid_i
// and the tree state; the tree updates on the clock edge after access_i.
// The constraint on the tree is what the paper describes; the walk rule above
// is this design's reading of it.
module tlb_plru_part #(
  parameter int unsigned ENTRIES = 16,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [ENTRIES-1:0] allowed_i,
  input  logic [ENTRIES-1:0] valid_i,
  input  logic               access_i,
  input  logic [IDX_W-1:0]   access_idx_i,
  output logic [IDX_W-1:0]   repl_idx_o,
  output logic               repl_valid_o
);

  localparam int unsigned LVLS = $clog2(ENTRIES);

  logic [ENTRIES-2:0] tree_q;
  logic [IDX_W-1:0]   plru_idx, inv_idx;
  logic               inv_found;

  // tree walk honouring the allowed mask
  always_comb begin
    int unsigned p, span, node;
    logic left_any, right_any, dir;
    p = 0;
    for (int unsigned l = 0; l < LVLS; l++) begin
      span      = ENTRIES >> (l + 1);
      node      = (1 << l) - 1 + p;
      left_any  = 1'b0;
      right_any = 1'b0;
      for (int unsigned e = 0; e < ENTRIES; e++) begin
        if (e / span == 2 * p)     left_any  |= allowed_i[e];
        if (e / span == 2 * p + 1) right_any |= allowed_i[e];
      end
      dir = tree_q[node];
      if (dir && !right_any) dir = 1'b0;
      else if (!dir && !left_any) dir = 1'b1;
      p = 2 * p + int'(dir);
    end
    plru_idx = IDX_W'(p);
  end

  // lowest allowed invalid entry
  always_comb begin
    inv_found = 1'b0;
    inv_idx   = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (allowed_i[e] && !valid_i[e]) begin
        inv_found = 1'b1;
        inv_idx   = IDX_W'(e);
      end
    end
  end

  assign repl_valid_o = |allowed_i;
  assign repl_idx_o   = inv_found ? inv_idx : plru_idx;

  // make every node on the touched path point to the other half
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tree_q <= '0;
    end else if (access_i) begin
      for (int unsigned l = 0; l < LVLS; l++) begin
        tree_q[(1 << l) - 1 + (access_idx_i >> (LVLS - l))] <= ~access_idx_i[LVLS-1-l];
      end
    end
  end

endmodule
