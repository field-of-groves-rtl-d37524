// decision_tree: one reprogrammable binary decision tree of a grove's
// processing element.
//
// The tree is complete, of depth DEPTH: 2^DEPTH - 1 internal nodes and
// 2^DEPTH leaves. Node i holds a feature offset OFF_i and a weight w_i; its
// children are 2i+1 (taken when x <= w) and 2i+2 (taken when x > w). A leaf
// holds a class probability vector (one byte per label, 255 = 1.0), as the
// trees of a probability-voting random forest do. Shallower trees from
// training are padded by copying a leaf into all of its descendants.
//
// Evaluation: a start pulse latches base, the address of the queue entry. In
// each of the next DEPTH cycles the tree reads one feature byte at
// base + 1 + OFF (the +1 skips the hop-count byte), compares it and moves one
// level down; it reads through feat_addr/feat_data, a combinational port of
// the data queue. done pulses DEPTH+1 cycles after start, and leaf_prob holds
// the reached leaf's vector from then until the next start.
// Node and leaf storage is written through prog. The node contents (weight
// and feature offset) and the x > w test follow the paper; which child the
// test selects, the leaf format and the one-level-per-cycle schedule are this
// design's choices.
module decision_tree
  import fog_pkg::*;
#(
  parameter int unsigned DEPTH = TREE_DEPTH,
  parameter int unsigned AW    = QADDR_W
) (
  input  logic            clk,
  input  logic            rst_n,
  // programming (already selected for this tree)
  input  logic            node_we,
  input  logic            leaf_we,
  input  logic [DEPTH-1:0] idx,
  input  logic [OFF_W-1:0] off,
  input  byte_t           w,
  input  logic [CLASS_W-1:0] cls,
  // evaluation
  input  logic            start,
  input  logic [AW-1:0]   base,
  output logic [AW-1:0]   feat_addr,
  input  byte_t           feat_data,
  output logic            busy,
  output logic            done,
  output prob_vec_t       leaf_prob
);
  localparam int unsigned N_NODES  = (1 << DEPTH) - 1;
  localparam int unsigned N_LEAVES = 1 << DEPTH;
  localparam int unsigned LW       = (DEPTH > 1) ? $clog2(DEPTH + 1) : 1;

  logic [OFF_W-1:0] node_off [N_NODES];
  byte_t            node_w   [N_NODES];
  prob_vec_t        leaves   [N_LEAVES];

  logic [DEPTH:0]   node;     // current node, heap numbering
  logic [LW-1:0]    level;
  logic [AW-1:0]    base_q;
  logic [DEPTH-1:0] leaf_idx;
  logic             go_right;

  always_ff @(posedge clk) begin
    if (node_we) begin
      node_off[idx] <= off;
      node_w[idx]   <= w;
    end
    if (leaf_we) leaves[idx][cls] <= w;
  end

  assign feat_addr = base_q + AW'(1) + AW'(node_off[node[DEPTH-1:0]]);
  assign go_right  = feat_data > node_w[node[DEPTH-1:0]];
  assign leaf_prob = leaves[leaf_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node     <= '0;
      level    <= '0;
      base_q   <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      leaf_idx <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        base_q <= base;
        node   <= '0;
        level  <= '0;
        busy   <= 1'b1;
      end else if (busy) begin
        if (level == LW'(DEPTH - 1)) begin
          // last comparison: the child is a leaf
          leaf_idx <= DEPTH'((2 * node + (go_right ? 2 : 1)) - N_NODES);
          busy     <= 1'b0;
          done     <= 1'b1;
        end
        node  <= 2 * node + (go_right ? (DEPTH+1)'(2) : (DEPTH+1)'(1));
        level <= level + 1'b1;
      end
    end
  end
endmodule
