// tb_minmax_conf: random and hand-made probability arrays into minmax_conf;
// max1, max2, confidence and label are compared with a sort-based reference.
module tb_minmax_conf;
  import fog_pkg::*;
  prob_vec_t prob;
  logic [CLASS_W:0] n_classes;
  byte_t max1, max2, conf, label;
  int checks = 0, failures = 0;

  minmax_conf dut (.*);

  task automatic check(input int n, input int unsigned exp_m1, exp_m2, exp_lab);
    checks++;
    if (max1 !== byte_t'(exp_m1) || max2 !== byte_t'(exp_m2) || conf !== byte_t'(exp_m1 - exp_m2)
        || label !== byte_t'(exp_lab)) begin
      failures++;
      $display("FAIL case %0d: got %0d %0d %0d lab %0d exp %0d %0d lab %0d",
               n, max1, max2, conf, label, exp_m1, exp_m2, exp_lab);
    end
  endtask

  initial begin
    // the paper's example: {0.3, 0.4, 0.3} -> label 1, confidence 0.1
    prob = '0; n_classes = 3;
    prob[0] = 77; prob[1] = 102; prob[2] = 77; prob[3] = 200;  // class 3 is outside n_classes
    #1 check(-1, 102, 77, 1);
    for (int n = 0; n < 2000; n++) begin
      int unsigned m1, m2, lab;
      n_classes = (CLASS_W+1)'(2 + $urandom_range(MAX_CLASSES - 2));
      for (int c = 0; c < MAX_CLASSES; c++)
        prob[c] = (n % 3 == 0) ? byte_t'($urandom_range(3)) : byte_t'($urandom);
      // reference: best then second best by two passes
      m1 = 0; lab = 0;
      for (int c = 0; c < n_classes; c++) if (prob[c] > m1 || c == 0) begin
        if (c == 0 || prob[c] > m1) begin m1 = prob[c]; lab = c; end
      end
      m2 = 0;
      for (int c = 0; c < n_classes; c++) if (c != lab && prob[c] > m2) m2 = prob[c];
      #1 check(n, m1, m2, lab);
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
