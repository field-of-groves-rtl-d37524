// tb_prob_combine: random leaf vectors, incoming probability arrays and hop
// counts into prob_combine; the grove average and the folded running mean are
// compared with an integer reference, including the paper's two-grove example
// ({0.32,0.35,0.33} then {0.28,0.45,0.27} -> {0.30,0.40,0.30}).
module tb_prob_combine;
  import fog_pkg::*;
  localparam int NT = TREES_PER_GROVE;
  prob_vec_t leaf_prob [NT];
  prob_vec_t old_prob, grove_prob, new_prob;
  byte_t hops;
  logic [CLASS_W:0] n_classes;
  int checks = 0, failures = 0;

  prob_combine dut (.*);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      n_classes = (CLASS_W+1)'(2 + $urandom_range(MAX_CLASSES - 2));
      hops = byte_t'((n < 1000) ? $urandom_range(N_GROVES - 1) : $urandom_range(255));
      for (int c = 0; c < MAX_CLASSES; c++) begin
        old_prob[c] = byte_t'($urandom);
        for (int t = 0; t < NT; t++) leaf_prob[t][c] = byte_t'($urandom);
      end
      if (n == 0) begin
        // example of the paper, both trees agreeing, scale 100 = 1.0
        n_classes = 3; hops = 1;
        old_prob[0] = 32; old_prob[1] = 35; old_prob[2] = 33;
        for (int t = 0; t < NT; t++) begin
          leaf_prob[t][0] = 28; leaf_prob[t][1] = 45; leaf_prob[t][2] = 27;
        end
      end
      #1;
      for (int c = 0; c < MAX_CLASSES; c++) begin
        int unsigned s, e;
        s = 0;
        for (int t = 0; t < NT; t++) s += leaf_prob[t][c];
        s = s / NT;
        e = (int'(old_prob[c]) * hops + s) / (hops + 1);
        if (c >= n_classes) begin s = 0; e = 0; end
        checks++;
        if (grove_prob[c] !== byte_t'(s) || new_prob[c] !== byte_t'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d c=%0d hops=%0d got %0d/%0d exp %0d/%0d",
                                      n, c, hops, grove_prob[c], new_prob[c], s, e);
        end
      end
      if (n == 0) begin
        checks++;
        if (new_prob[0] != 30 || new_prob[1] != 40 || new_prob[2] != 30) begin
          failures++;
          $display("FAIL paper example: %0d %0d %0d", new_prob[0], new_prob[1], new_prob[2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
