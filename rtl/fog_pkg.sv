// fog_pkg: sizes, types and run-time settings shared by every block of the
// Field of Groves (FoG) random-forest accelerator.
//
// The defaults are the main configuration of the design: 8 groves of 2
// decision trees each (the "8x2" topology), sized for the largest workload,
// MNIST (784 one-byte features, 10 labels). A queue entry is byte addressed:
//   byte 0                     hop count
//   bytes 1 .. F               input features (one byte each)
//   byte  F+1                  input id
//   bytes F+2 .. F+1+C         probability array, one byte per label
// so its length is Gamma = F + C + 2 bytes (796 for MNIST). Probabilities are
// unsigned bytes where 255 stands for 1.0; the confidence threshold uses the
// same scale. The byte layout and the number formats are this design's own
// choices; the paper gives the field order (hops, payload + id, probabilities)
// and one byte per field element.
package fog_pkg;

  // ---- topology (paper: 8 groves x 2 trees, the chosen 8x2 point) ----
  parameter int unsigned N_GROVES        = 8;
  parameter int unsigned TREES_PER_GROVE = 2;
  // tree depth is not stated for the chip; 5 is the depth used in the
  // authors' software experiments.
  parameter int unsigned TREE_DEPTH      = 5;

  // ---- data sizes ----
  parameter int unsigned MAX_FEATURES  = 784;  // MNIST, the widest workload
  parameter int unsigned MAX_CLASSES   = 26;   // ISOLET and Letter have 26 labels
  parameter int unsigned MAX_GAMMA     = MAX_FEATURES + MAX_CLASSES + 2;
  // data queue: 8 MNIST entries of 796 bytes per grove ("6kB")
  parameter int unsigned QUEUE_BYTES   = 8 * (784 + 10 + 2);

  // ---- derived widths ----
  parameter int unsigned GROVE_W  = (N_GROVES > 1) ? $clog2(N_GROVES) : 1;
  parameter int unsigned TREE_W   = (TREES_PER_GROVE > 1) ? $clog2(TREES_PER_GROVE) : 1;
  parameter int unsigned NODE_W   = TREE_DEPTH;            // 2^D - 1 internal nodes, 2^D leaves
  parameter int unsigned OFF_W    = $clog2(MAX_FEATURES);  // feature offset in a node
  parameter int unsigned CLASS_W  = $clog2(MAX_CLASSES);
  parameter int unsigned GAMMA_W  = $clog2(MAX_GAMMA + 1);
  parameter int unsigned QADDR_W  = $clog2(QUEUE_BYTES);

  typedef logic [7:0] byte_t;
  typedef logic [MAX_GAMMA-1:0][7:0]    entry_t;     // one queue entry, byte k = entry[k]
  typedef logic [MAX_CLASSES-1:0][7:0]  prob_vec_t;  // probability array
  typedef logic [MAX_FEATURES-1:0][7:0] features_t;  // input payload from the processor

  // run-time settings held by the control unit
  typedef struct packed {
    byte_t               thresh;     // confidence threshold, 255 = 1.0
    byte_t               max_hops;   // upper limit on groves visited, 1..N_GROVES
    logic [GAMMA_W-1:0]  gamma;      // queue word length in bytes = F + C + 2
    logic [CLASS_W:0]    n_classes;  // C, 2..MAX_CLASSES
    byte_t               q_entries;  // entries of length gamma the queue may hold
  } cfg_t;

  // tree programming strobe, broadcast to all groves
  typedef struct packed {
    logic                node_we;   // write a node {offset, weight}
    logic                leaf_we;   // write one probability byte of a leaf
    logic [GROVE_W-1:0]  grove;
    logic [TREE_W-1:0]   tree;
    logic [NODE_W-1:0]   idx;       // node index (0 = root, children 2i+1, 2i+2) or leaf index
    logic [OFF_W-1:0]    off;       // feature offset inside the input payload
    byte_t               w;         // node weight, or leaf probability byte
    logic [CLASS_W-1:0]  cls;       // class of a leaf probability byte
  } prog_t;

  // one finished classification, returned to the processor
  typedef struct packed {
    byte_t      id;
    byte_t      label;   // argmax of the probability array
    byte_t      hops;    // groves that processed the input
    byte_t      conf;    // max1 - max2
    prob_vec_t  prob;
  } result_t;

endpackage
