// tb_grove: one grove with its 2 trees programmed at random, working on a
// small dataset of 8 features and 3 labels (gamma = 13), queue of 4 entries.
// The testbench plays the input queue, the previous grove (sender on the
// ring), the next grove (receiver, acking after random delays) and the output
// queue. Checked against the reference model:
//   - a new input that is confident at once: result, hops = 1, and res_valid
//     exactly gamma + D + C + 5 cycles after the request;
//   - a new input that is not: the entry (hops = 1, features, id, averaged
//     probabilities) is sent to the next grove 2*gamma + D + C + 5 cycles after
//     the request, and req is held until ack;
//   - entries from the previous grove with random hop counts, probability
//     arrays and thresholds: finished or forwarded exactly as the model says,
//     including the stop at max_hops;
//   - front placement: an entry from the ring overtakes inputs already queued;
//   - in_space follows the two-free-entries rule.
module tb_grove;
  import fog_pkg::*;
  import fog_model_pkg::*;
  localparam int F = 8, C = 3, G = F + C + 2, Q = 4, D = TREE_DEPTH;
  localparam int NN = (1 << D) - 1, NL = 1 << D;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  prog_t prog = '0;
  logic in_req = 0, in_ack, in_space;
  entry_t in_entry = '0;
  logic res_valid, res_ready = 1;
  result_t result;
  byte_t count;
  int checks = 0, failures = 0;
  int n_first = 0, n_fwd = 0, n_ring = 0, n_maxhop = 0;

  grove_link_if prev (clk, rst_n);
  grove_link_if next (clk, rst_n);

  grove #(.GROVE_ID(0)) dut (
    .clk, .rst_n, .cfg, .prog,
    .from_prev (prev.receiver), .to_next (next.sender),
    .in_req, .in_entry, .in_ack, .in_space,
    .res_valid, .res_ready, .result, .count
  );

  always #5 clk = ~clk;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic entry_t mk_entry(input feat_t x, input int id, input int hops, input vec_t p);
    entry_t e = '0;
    e[0] = byte_t'(hops);
    for (int i = 0; i < F; i++) e[1 + i] = x[i];
    e[F + 1] = byte_t'(id);
    for (int c = 0; c < C; c++) e[F + 2 + c] = byte_t'(p[c]);
    return e;
  endfunction

  task automatic rand_x(output feat_t x);
    for (int i = 0; i < MAX_FEATURES; i++) x[i] = (i < F) ? 8'($urandom) : 8'd0;
  endtask

  task automatic program_trees();
    for (int t = 0; t < TREES_PER_GROVE; t++) begin
      for (int i = 0; i < NN; i++) begin
        m_off[0][t][i] = $urandom_range(F - 1);
        m_w[0][t][i]   = $urandom_range(255);
        @(negedge clk);
        prog = '0; prog.node_we = 1; prog.grove = 0; prog.tree = TREE_W'(t);
        prog.idx = NODE_W'(i); prog.off = OFF_W'(m_off[0][t][i]); prog.w = byte_t'(m_w[0][t][i]);
      end
      for (int l = 0; l < NL; l++) begin
        // a leaf of a probability tree: its C values sum to about 255
        int a = $urandom_range(255), b = $urandom_range(255 - a);
        int v [3];
        v[0] = a; v[1] = b; v[2] = 255 - a - b;
        for (int c = 0; c < MAX_CLASSES; c++) begin
          m_leaf[0][t][l][c] = (c < C) ? v[(c + l) % 3] : 0;
          @(negedge clk);
          prog = '0; prog.leaf_we = 1; prog.grove = 0; prog.tree = TREE_W'(t);
          prog.idx = NODE_W'(l); prog.cls = CLASS_W'(c); prog.w = byte_t'(m_leaf[0][t][l][c]);
        end
      end
    end
    // a write to another grove must not land here
    @(negedge clk);
    prog = '0; prog.node_we = 1; prog.grove = 1; prog.idx = 0; prog.off = 0; prog.w = 8'hFF;
    @(negedge clk);
    prog = '0;
  endtask

  task automatic send_in(input entry_t e);
    @(negedge clk);
    in_entry = e; in_req = 1;
    do @(posedge clk); while (!in_ack);
    #1 in_req = 0;
  endtask

  task automatic send_prev(input entry_t e);
    @(negedge clk);
    prev.data = e; prev.req = 1;
    do @(posedge clk); while (!prev.ack);
    #1 prev.req = 0;
  endtask

  // wait for the grove's next output; fwd tells which way it went
  task automatic get_out(output bit fwd, output result_t r, output entry_t e);
    int n = 0;
    fwd = 0;
    forever begin
      @(posedge clk);
      if (res_valid) begin r = result; break; end
      if (next.req) begin
        fwd = 1; e = next.data;
        repeat ($urandom_range(4)) begin @(posedge clk); chk("req held", next.req); end
        #1 next.ack = 1;
        @(posedge clk);
        #1 next.ack = 0;
        chk("req dropped", !next.req);
        break;
      end
      n++;
      if (n > 5000) begin chk("output timeout", 0); break; end
    end
  endtask

  // check one output against the model: p_in/hops_in are the entry's values
  task automatic expect_out(input feat_t x, input int id, input int hops_in, input vec_t p);
    bit fwd; result_t r; entry_t e;
    int unsigned conf, label;
    int h = hops_in + 1;
    grove_step(0, x, C, p, hops_in, p);
    maxdiff(p, C, conf, label);
    get_out(fwd, r, e);
    if (conf >= cfg.thresh || h >= cfg.max_hops) begin
      chk("finished", !fwd);
      if (!fwd) begin
        chk("result id", r.id == byte_t'(id));
        chk("result hops", r.hops == byte_t'(h));
        chk("result label", r.label == byte_t'(label));
        chk("result conf", r.conf == byte_t'(conf));
        for (int c = 0; c < MAX_CLASSES; c++)
          chk("result prob", r.prob[c] == ((c < C) ? byte_t'(p[c]) : 8'd0));
      end
      if (h >= cfg.max_hops && conf < cfg.thresh) n_maxhop++;
    end else begin
      chk("forwarded", fwd);
      if (fwd) begin
        chk("fwd hops", e[0] == byte_t'(h));
        for (int i = 0; i < F; i++) chk("fwd feature", e[1 + i] == x[i]);
        chk("fwd id", e[F + 1] == byte_t'(id));
        for (int c = 0; c < C; c++) chk("fwd prob", e[F + 2 + c] == byte_t'(p[c]));
      end
    end
  endtask

  initial begin
    feat_t x;
    vec_t p;
    cfg = '{thresh: 8'd0, max_hops: 8'd8, gamma: GAMMA_W'(G), n_classes: (CLASS_W+1)'(C), q_entries: 8'(Q)};
    prev.req = 0; prev.data = '0; next.ack = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    program_trees();

    // 1. confident at the first grove, with latency
    for (int n = 0; n < 10; n++) begin
      automatic int lat = 0;
      bit fwd; result_t r; entry_t e;
      rand_x(x);
      foreach (p[c]) p[c] = 0;
      cfg.thresh = 0;
      @(negedge clk);
      in_entry = mk_entry(x, n, 0, p); in_req = 1;
      forever begin
        @(posedge clk);
        if (in_ack) #1 in_req = 0;
        if (res_valid) break;
        lat++;
        if (lat > 2000) break;
      end
      chk("first-grove latency", lat == G + D + C + 5);
      if (lat != G + D + C + 5) $display("  latency %0d expected %0d", lat, G + D + C + 5);
      grove_step(0, x, C, p, 0, p);
      chk("first-grove hops", result.hops == 1 && result.id == byte_t'(n));
      for (int c = 0; c < C; c++) chk("first-grove prob", result.prob[c] == byte_t'(p[c]));
      n_first++;
      @(negedge clk);
    end

    // 2. not confident: forwarded, with latency
    for (int n = 0; n < 5; n++) begin
      automatic int lat = 0;
      rand_x(x);
      foreach (p[c]) p[c] = 0;
      cfg.thresh = 255;
      @(negedge clk);
      in_entry = mk_entry(x, 20 + n, 0, p); in_req = 1;
      forever begin
        @(posedge clk);
        if (in_ack) #1 in_req = 0;
        if (next.req) break;
        lat++;
        if (lat > 4000) break;
      end
      chk("forward latency", lat == 2 * G + D + C + 5);
      if (lat != 2 * G + D + C + 5) $display("  fwd latency %0d expected %0d", lat, 2 * G + D + C + 5);
      grove_step(0, x, C, p, 0, p);
      chk("forward hops", next.data[0] == 1);
      for (int c = 0; c < C; c++) chk("forward prob", next.data[F + 2 + c] == byte_t'(p[c]));
      #1 next.ack = 1;
      @(posedge clk);
      #1 next.ack = 0;
      n_fwd++;
    end

    // 3. random inputs from the ring and from the processor
    for (int n = 0; n < 200; n++) begin
      int hops_in;
      rand_x(x);
      cfg.thresh   = byte_t'($urandom_range(120));
      cfg.max_hops = byte_t'($urandom_range(1, 8));
      if (n % 3 == 0) begin
        foreach (p[c]) p[c] = 0;
        hops_in = 0;
        send_in(mk_entry(x, n, 0, p));
      end else begin
        hops_in = $urandom_range(0, 6);
        foreach (p[c]) p[c] = 0;
        if (hops_in > 0) begin
          automatic int a = $urandom_range(255), b = $urandom_range(255 - a);
          p[0] = a; p[1] = b; p[2] = 255 - a - b;
        end
        send_prev(mk_entry(x, n, hops_in, p));
        n_ring++;
      end
      expect_out(x, n, hops_in, p);
    end

    // 4. front placement and in_space
    begin
      feat_t xs [4];
      vec_t z, pr;
      int order [4];
      cfg.thresh = 255; cfg.max_hops = 8;
      foreach (z[c]) z[c] = 0;
      for (int i = 0; i < 4; i++) rand_x(xs[i]);
      // first input goes out to the next grove, which does not answer yet
      send_in(mk_entry(xs[0], 100, 0, z));
      while (!next.req) @(posedge clk);
      send_in(mk_entry(xs[1], 101, 0, z));
      send_in(mk_entry(xs[2], 102, 0, z));
      @(negedge clk);
      chk("two queued", count == 2);
      chk("room for one more new input", in_space);
      send_in(mk_entry(xs[3], 103, 0, z));
      @(negedge clk);
      chk("no room for new inputs", !in_space && count == 3);
      // an entry from the ring still gets in, at the front
      foreach (pr[c]) pr[c] = 85;
      send_prev(mk_entry(xs[0], 110, 2, pr));
      @(negedge clk);
      chk("ring entry accepted", count == 4);
      // release the ring and collect the order of departures
      for (int i = 0; i < 5; i++) begin
        bit fwd; result_t r; entry_t e;
        while (!next.req) @(posedge clk);
        e = next.data;
        if (i > 0) order[i - 1] = e[F + 1];
        #1 next.ack = 1;
        @(posedge clk);
        #1 next.ack = 0;
      end
      chk("ring entry first", order[0] == 110);
      chk("then queue order", order[1] == 101 && order[2] == 102 && order[3] == 103);
    end

    chk("every mechanism seen", n_first > 0 && n_fwd > 0 && n_ring > 0 && n_maxhop > 0);
    $display("first-grove exits %0d, forwards %0d, ring inputs %0d, max-hop stops %0d",
             n_first, n_fwd, n_ring, n_maxhop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
