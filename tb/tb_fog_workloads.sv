// tb_fog_workloads: the whole accelerator at its default sizes, run on the
// shapes of the five evaluated datasets one after another, without a reset in
// between:
//   MNIST        784 features, 10 labels, gamma 796, 8 queue entries
//   ISOLET       617 features, 26 labels, gamma 645, 9 queue entries
//   Penbase       16 features, 10 labels, gamma  28, 227 queue entries
//   Letter        16 features, 26 labels, gamma  44, 144 queue entries
//   Segmentation  19 features,  7 labels, gamma  28, 227 queue entries
// (q_entries = floor(6368 / gamma), capped at 255.) For each dataset the 16
// trees are reprogrammed with random nodes and peaked random leaves, the
// entry format registers are rewritten while the queues are empty, and a
// stream of random inputs is classified twice: with threshold 0.1 and with
// threshold 0.5, both with max_hops 8. Every result is compared with the
// reference model (started at the grove the input queue chose); the mean
// number of groves visited must not fall when the threshold rises, which is
// the energy / accuracy knob the design exists for. Trained forests are not
// available here, so the trees are random: this exercises the data formats,
// queue sizes and control flow of each workload, not its accuracy.
// Each dataset must produce results that stop at the first grove and results
// that are forwarded at least once.
module tb_fog_workloads;
  import fog_pkg::*;
  import fog_model_pkg::*;
  localparam int NN = (1 << TREE_DEPTH) - 1, NL = 1 << TREE_DEPTH;
  localparam int N_SETS = 5;

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
  int n_first = 0, n_fwd = 0, hop_sum = 0;
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
          for (int c = 0; c < nc; c++) r[c] = $urandom_range(1, 40);
          r[$urandom_range(nc - 1)] += $urandom_range(0, 300);
          for (int c = 0; c < nc; c++) sum += r[c];
          for (int c = 0; c < MAX_CLASSES; c++) begin
            m_leaf[g][t][l][c] = (c < nc) ? r[c] * 255 / sum : 0;
            if (c < nc) wr(6, pack(g, t, l, c, m_leaf[g][t][l][c]));
          end
        end
      end
  endtask

  task automatic settings(input int nf, input int nc, input int th, input int mh);
    automatic int gam = nf + nc + 2;
    automatic int q = QUEUE_BYTES / gam;
    if (q > 255) q = 255;
    n_feat = nf; n_cls = nc; thresh = th; max_hops = mh;
    wr(0, th); wr(1, mh); wr(2, gam); wr(3, nc); wr(4, q);
    @(negedge clk);
    chk("format registers", dut.cfg.gamma == GAMMA_W'(gam) && dut.cfg.q_entries == byte_t'(q));
  endtask

  // processor: n inputs with random gaps; waits for all results
  task automatic run(input int n);
    int target = sent + n;
    for (int k = 0; k < n; k++) begin
      feat_t x;
      for (int i = 0; i < MAX_FEATURES; i++) x[i] = (i < n_feat) ? 8'($urandom) : 8'd0;
      @(negedge clk);
      for (int i = 0; i < MAX_FEATURES; i++) in_features[i] = x[i];
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      xs[dut.u_inq.next_id] = x;
      pending[dut.u_inq.next_id] = 1;
      #1 in_valid = 0;
      sent++;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (got < target) @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n && dut.u_inq.pop) begin
    automatic int id = dut.in_entry[n_feat + 1];
    start_of[id] = int'(dut.u_inq.target);
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
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
    if (h == 1) n_first++;
    else n_fwd++;
    hop_sum += h;
    got++;
  end

  always @(negedge clk) out_ready <= ($urandom_range(9) < 7);

  initial begin
    string name [N_SETS] = '{"MNIST", "ISOLET", "Penbase", "Letter", "Segmentation"};
    int    nf   [N_SETS] = '{784, 617, 16, 16, 19};
    int    nc   [N_SETS] = '{10, 26, 10, 26, 7};
    int    n_in [N_SETS] = '{16, 16, 60, 60, 60};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < N_SETS; d++) begin
      int f0, w0, h_low, h_high, got0;
      program_forest(nf[d], nc[d]);
      f0 = n_first; w0 = n_fwd;
      // threshold 0.1
      settings(nf[d], nc[d], 26, 8);
      hop_sum = 0; got0 = got;
      run(n_in[d]);
      h_low = hop_sum;
      // threshold 0.5
      settings(nf[d], nc[d], 128, 8);
      hop_sum = 0;
      run(n_in[d]);
      h_high = hop_sum;
      $display("%-12s F=%0d C=%0d gamma=%0d: %0d results, groves per input %0.2f at 0.1, %0.2f at 0.5",
               name[d], nf[d], nc[d], nf[d] + nc[d] + 2, got - got0,
               real'(h_low) / n_in[d], real'(h_high) / n_in[d]);
      chk("higher threshold uses no fewer groves", h_high >= h_low);
      chk("first-grove exits in this dataset", n_first > f0);
      chk("forwards in this dataset", n_fwd > w0);
    end
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
