// part_plru: binary-tree pseudo-LRU replacement with partition and lock
// constraints.
//
// The tree has ENTRIES leaves (one per TLB entry) and ENTRIES-1 internal
// nodes stored in heap order (children of node n are 2n+1 and 2n+2). Each
// node holds one bit: 0 means the next victim lies in the left sub-tree,
// 1 in the right sub-tree. On a hit or a replacement every node on the path
// to the touched leaf is set to point away from it, as in the unmodified
// CVA6 tree.
//
// The partition extension: a leaf is reachable when its partition bit in
// part_en_i (the CUR_PART register) is set and the entry is not taken by a
// lock slot. A node is reachable when one of its children is. During the
// victim search each node follows its stored bit if that child is
// reachable and the other child otherwise, so protected entries can never
// be selected. Partition p covers entries [p*ENTRIES/PARTS,
// (p+1)*ENTRIES/PARTS). The tree bit encoding, the zero reset state and the
// rule "take the other edge at the lowest node where the chosen edge is
// blocked" are this design's choices; the rule reproduces the published
// example (locking the entry the tree points to moves the victim to its
// sibling).
//
// Timing: victim_o is combinational from the tree state and the two masks;
// the tree updates on the clock edge after hit_i / repl_i.
module part_plru #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned PARTS   = 16
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [ENTRIES-1:0] hit_i,        // one-hot, entry used by a lookup
  input  logic               repl_i,       // victim_o is being replaced
  input  logic [PARTS-1:0]   part_en_i,    // CUR_PART
  input  logic [ENTRIES-1:0] locked_i,     // entries owned by lock slots
  output logic [ENTRIES-1:0] victim_o,     // one-hot next victim
  output logic               victim_valid_o
);
  localparam int unsigned LVLS  = $clog2(ENTRIES);
  localparam int unsigned NODES = ENTRIES - 1;
  localparam int unsigned PER_PART = ENTRIES / PARTS;

  logic [NODES-1:0]         tree_q, tree_d;
  logic [2*ENTRIES-2:0]     reach;      // nodes then leaves, heap order
  logic [NODES-1:0]         dir;        // effective direction per node

  // reachability, bottom up
  always_comb begin
    reach = '0;
    for (int unsigned i = 0; i < ENTRIES; i++)
      reach[NODES+i] = part_en_i[i / PER_PART] && !locked_i[i];
    for (int n = int'(NODES) - 1; n >= 0; n--)
      reach[n] = reach[2*n+1] || reach[2*n+2];
  end

  // effective branch per node
  always_comb begin
    for (int unsigned n = 0; n < NODES; n++) begin
      if (tree_q[n]) dir[n] = reach[2*n+2] ? 1'b1 : 1'b0;
      else           dir[n] = reach[2*n+1] ? 1'b0 : 1'b1;
    end
  end

  // a leaf is the victim when every node on its path branches towards it
  always_comb begin
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      logic on_path;
      int unsigned node;
      on_path = 1'b1;
      node    = 0;
      for (int unsigned l = 0; l < LVLS; l++) begin
        logic bitv;
        bitv = i[LVLS-1-l];
        if (dir[node] != bitv) on_path = 1'b0;
        node = 2 * node + 1 + bitv;
      end
      victim_o[i] = on_path && reach[NODES+i];
    end
  end
  assign victim_valid_o = reach[0];

  // point the path away from the touched leaf
  logic [ENTRIES-1:0] touch;
  logic [LVLS-1:0]    touch_idx;
  int unsigned        upd_node;
  always_comb begin
    touch     = repl_i ? victim_o : hit_i;
    touch_idx = '0;
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (touch[i]) touch_idx = LVLS'(i);
    tree_d   = tree_q;
    upd_node = 0;
    for (int unsigned l = 0; l < LVLS; l++) begin
      if (|touch) tree_d[upd_node] = ~touch_idx[LVLS-1-l];
      upd_node = 2 * upd_node + 1 + 32'(touch_idx[LVLS-1-l]);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) tree_q <= '0;
    else         tree_q <= tree_d;
  end

  // A replacement needs a reachable entry; the victim is always one-hot.
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(victim_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni) victim_valid_o |-> $onehot(victim_o));

endmodule
