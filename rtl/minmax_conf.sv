// minmax_conf: the "MinMax" unit of a grove's processing element.
//
// Combinational. Over the first n_classes bytes of a probability array it finds
// the largest value max1 (its index is the predicted label; the lowest index
// wins a tie) and the second largest max2, and gives the confidence
// conf = max1 - max2. The grove compares conf with the run-time threshold.
// Confidence as the gap between the two most probable labels is the paper's
// definition; the single-label (not multi-output) case is implemented.
module minmax_conf
  import fog_pkg::*;
(
  input  prob_vec_t         prob,
  input  logic [CLASS_W:0]  n_classes,
  output byte_t             max1,
  output byte_t             max2,
  output byte_t             conf,
  output byte_t             label
);
  always_comb begin
    max1  = '0;
    max2  = '0;
    label = '0;
    for (int c = 0; c < MAX_CLASSES; c++) begin
      if (c < int'(n_classes)) begin
        if (c == 0 || prob[c] > max1) begin
          if (c != 0) max2 = max1;
          max1  = prob[c];
          label = byte_t'(c);
        end else if (prob[c] > max2) begin
          max2 = prob[c];
        end
      end
    end
    conf = max1 - max2;
  end
endmodule
