// tb_fog_top: the whole accelerator at its default sizes (8 groves of 2
// depth-5 trees, 6368-byte queues), driven through its ports only: register
// writes program all 16 trees and the settings, a processor model streams
// inputs with random gaps, and results are drained with random out_ready.
// Every result is compared with the reference model started at the grove the
// input queue picked for that input (seen at the dispatch handshake).
// Phases:
//   1  small dataset (8 features, 3 labels, gamma 13, 4-entry queues),
//      threshold 0.1, max_hops 8 - mixes first-grove exits and forwarding
//   2  same data, threshold at maximum - every input visits all 8 groves,
//      so FoG acts as the plain random forest
//   3  threshold 0.3, max_hops 3 - the hop cap stops inputs
//   4  MNIST size: 784 features, 10 labels, gamma 796, 8-entry queues
// Counted, and each must happen: first-grove exits, forwards, stops at the hop
// cap, ring entries placed in front of queued inputs, processor stalls
// (in_ready low), output back-pressure, every grove chosen as a start.
module tb_fog_top;
  import fog_pkg::*;
  import fog_model_pkg::*;
  localparam int NN = (1 << TREE_DEPTH) - 1, NL = 1 << TREE_DEPTH;

  logic clk = 0, rst_n = 0;
  logic reg_we = 0;
  logic [3:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0;
  logic in_valid = 0, in_ready;
  features_t in_features = '0;
  logic out_valid, out_ready = 0;
  result_t out_result;

  fog_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_first = 0, n_fwd = 0, n_cap = 0, n_front = 0, n_stall = 0, n_bp = 0, n_allg = 0;
  int starts [N_GROVES];
  feat_t xs [256];
  int start_of [256];
  bit pending [256];
  int n_feat = 8, n_cls = 3, thresh = 26, max_hops = 8;
  int sent = 0, got = 0;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(input int a, input int d);
    @(negedge clk); reg_we = 1; reg_addr = 4'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  function automatic int pack(int g, int t, int idx, int off, int w);
    return w | (off << 8) | (idx << (8 + OFF_W)) | (t << (8 + OFF_W + NODE_W))
             | (g << (8 + OFF_W + NODE_W + TREE_W));
  endfunction

  task automatic program_forest(input int nf, input int nc);
    for (int g = 0; g < N_GROVES; g++)
      for (int t = 0; t < TREES_PER_GROVE; t++) begin
        for (int i = 0; i < NN; i++) begin
          m_off[g][t][i] = $urandom_range(nf - 1);
          m_w[g][t][i]   = $urandom_range(255);
          wr(5, pack(g, t, i, m_off[g][t][i], m_w[g][t][i]));
        end
        for (int l = 0; l < NL; l++) begin
          int r [MAX_CLASSES];
          int sum = 0;
          // peaked leaves (one label dominant) keep some inputs easy
          for (int c = 0; c < nc; c++) begin r[c] = $urandom_range(1, 40); sum += r[c]; end
          r[$urandom_range(nc - 1)] += $urandom_range(0, 200);
          sum = 0;
          for (int c = 0; c < nc; c++) sum += r[c];
          for (int c = 0; c < MAX_CLASSES; c++) begin
            m_leaf[g][t][l][c] = (c < nc) ? r[c] * 255 / sum : 0;
            if (c < nc) wr(6, pack(g, t, l, c, m_leaf[g][t][l][c]));
          end
        end
      end
  endtask

  task automatic settings(input int nf, input int nc, input int q, input int th, input int mh);
    n_feat = nf; n_cls = nc; thresh = th; max_hops = mh;
    wr(0, th); wr(1, mh); wr(2, nf + nc + 2); wr(3, nc); wr(4, q);
  endtask

  // processor: n inputs with random gaps; waits for all results
  task automatic run(input int n, input int bp);
    int target = sent + n;
    for (int k = 0; k < n; k++) begin
      feat_t x;
      for (int i = 0; i < MAX_FEATURES; i++) x[i] = (i < n_feat) ? 8'($urandom) : 8'd0;
      @(negedge clk);
      for (int i = 0; i < MAX_FEATURES; i++) in_features[i] = x[i];
      in_valid = 1;
      forever begin
        @(posedge clk);
        if (in_ready) break;
        n_stall++;
      end
      xs[dut.u_inq.next_id] = x;
      pending[dut.u_inq.next_id] = 1;
      #1 in_valid = 0;
      sent++;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (got < target) @(posedge clk);
  endtask

  // dispatch monitor: which grove each input starts at
  always @(posedge clk) if (rst_n && dut.u_inq.pop) begin
    automatic int id = dut.in_entry[n_feat + 1];
    start_of[id] = int'(dut.u_inq.target);
    starts[dut.u_inq.target]++;
  end

  // ring entries that overtake queued inputs
  for (genvar g = 0; g < N_GROVES; g++) begin : g_mon
    always @(posedge clk)
      if (rst_n && dut.g_grove[g].u_grove.push_front && dut.g_grove[g].u_grove.count != 0) n_front++;
  end

  // result checker
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) n_bp++;
    if (out_valid && out_ready) begin
      automatic int id = out_result.id;
      automatic vec_t p;
      automatic int unsigned conf, label, h;
      chk("result for a pending input", pending[id]);
      pending[id] = 0;
      h = classify(start_of[id], xs[id], n_cls, thresh, max_hops, p, conf, label);
      chk("hops", out_result.hops == byte_t'(h));
      chk("label", out_result.label == byte_t'(label));
      chk("conf", out_result.conf == byte_t'(conf));
      for (int c = 0; c < MAX_CLASSES; c++)
        chk("prob", out_result.prob[c] == ((c < n_cls) ? byte_t'(p[c]) : 8'd0));
      if (out_result.hops != byte_t'(h))
        $display("  id %0d start %0d hops %0d expected %0d", id, start_of[id], out_result.hops, h);
      if (h == 1) n_first++;
      else n_fwd++;
      if (h == max_hops && conf < thresh) n_cap++;
      if (h == N_GROVES) n_allg++;
      got++;
    end
  end

  always @(negedge clk) out_ready <= ($urandom_range(9) < 6);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // settings after reset are the MNIST ones
    chk("reset gamma", dut.cfg.gamma == 796 && dut.cfg.n_classes == 10 && dut.cfg.q_entries == 8);

    program_forest(8, 3);
    settings(8, 3, 4, 26, 8);
    run(150, 1);
    $display("phase 1 done: %0d results", got);
    settings(8, 3, 4, 255, 8);
    begin
      automatic int n_before = n_allg;
      run(40, 1);
      chk("threshold at maximum: all groves used", n_allg - n_before >= 39);
    end
    $display("phase 2 done: %0d results", got);
    settings(8, 3, 4, 77, 3);
    run(60, 1);
    $display("phase 3 done: %0d results", got);

    // MNIST-sized inputs at the reset-time queue settings
    program_forest(784, 10);
    settings(784, 10, 8, 26, 8);
    run(24, 1);
    $display("phase 4 (784 features, 10 labels) done: %0d results", got);

    $display("first-grove exits %0d, forwards %0d, hop-cap stops %0d, all-grove runs %0d",
             n_first, n_fwd, n_cap, n_allg);
    $display("ring entries in front of queued inputs %0d, processor stalls %0d, output back-pressure %0d",
             n_front, n_stall, n_bp);
    chk("first-grove exit seen", n_first > 0);
    chk("forward seen", n_fwd > 0);
    chk("hop-cap stop seen", n_cap > 0);
    chk("front placement seen", n_front > 0);
    chk("processor stall seen", n_stall > 0);
    chk("output back-pressure seen", n_bp > 0);
    for (int g = 0; g < N_GROVES; g++) chk("every grove starts inputs", starts[g] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
