// prob_combine: the "Sigma(Probability)/N" unit of a grove's processing element.
//
// Combinational. It first averages the leaf probability vectors of the grove's
// N_TREES trees, giving the grove's own estimate g. It then folds g into the
// probability array p that came with the input, which is already the mean of
// the hops groves that processed it before:
//     new[c] = (p[c] * hops + g[c]) / (hops + 1)
// For a new input (hops = 0) this is g itself. This equals Algorithm
// "GCEval"'s running sum divided by the number of groves, kept in one byte per
// label. Labels at or above n_classes are forced to zero. Both divisions
// truncate. The averaging follows the paper; the byte format and truncation
// are this design's choices.
module prob_combine
  import fog_pkg::*;
#(
  parameter int unsigned N_TREES = TREES_PER_GROVE
) (
  input  prob_vec_t          leaf_prob [N_TREES],
  input  prob_vec_t          old_prob,
  input  byte_t              hops,        // groves that processed the input so far
  input  logic [CLASS_W:0]   n_classes,
  output prob_vec_t          grove_prob,
  output prob_vec_t          new_prob
);
  localparam int unsigned SW = 8 + $clog2(N_TREES + 1);

  always_comb begin
    for (int c = 0; c < MAX_CLASSES; c++) begin
      logic [SW-1:0] sum;
      logic [16:0]   acc;
      sum = '0;
      for (int t = 0; t < N_TREES; t++) sum = sum + SW'(leaf_prob[t][c]);
      grove_prob[c] = byte_t'(sum / SW'(N_TREES));
      acc = 17'(old_prob[c]) * 17'(hops) + 17'(grove_prob[c]);
      new_prob[c] = byte_t'(acc / (17'(hops) + 17'd1));
      if (c >= int'(n_classes)) begin
        grove_prob[c] = '0;
        new_prob[c]   = '0;
      end
    end
  end
endmodule
