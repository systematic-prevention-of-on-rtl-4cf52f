// plru_tree: tree pseudo-LRU replacement for a fully associative TLB.
//
// A binary tree of ENTRIES-1 bits sits above the entries. Each node bit points
// to the half that was used less recently: 0 = left, 1 = right. An access to
// an entry (one-hot used_i, from a hit or a fill) sets every node on its path
// to point away from it. The replacement candidate (repl_o, one-hot, and
// repl_idx_o) is found by following the node bits from the root; it is
// combinational from the registered tree. The tree depends on past accesses,
// so clear_i (Microreset) returns it to all zeros, as rst_ni does. The tree
// structure is a common pseudo-LRU; its exact encoding is this design's choice.
module plru_tree #(
  parameter int unsigned ENTRIES = 16
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       clear_i,
  input  logic [ENTRIES-1:0]         used_i,
  output logic [ENTRIES-1:0]         repl_o,
  output logic [$clog2(ENTRIES)-1:0] repl_idx_o
);

  localparam int unsigned LEVELS = $clog2(ENTRIES);

  logic [ENTRIES-2:0] tree_q, tree_d;

  always_comb begin
    tree_d = tree_q;
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      if (used_i[e]) begin
        for (int unsigned l = 0; l < LEVELS; l++) begin
          // node l levels below the root on the path to entry e
          tree_d[(1 << l) - 1 + (e >> (LEVELS - l))] = ~e[LEVELS - l - 1];
        end
      end
    end
  end

  always_comb begin
    logic [LEVELS-1:0] path;
    path = '0;
    for (int unsigned l = 0; l < LEVELS; l++) begin
      path = {path[LEVELS-2:0], tree_q[(1 << l) - 1 + path]};
    end
    repl_idx_o = path;
    repl_o     = ENTRIES'(1) << path;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      tree_q <= '0;
    else if (clear_i) tree_q <= '0;
    else              tree_q <= tree_d;
  end

  initial assert (ENTRIES >= 4 && (1 << LEVELS) == ENTRIES)
    else $error("plru_tree: ENTRIES must be a power of two >= 4");

endmodule
