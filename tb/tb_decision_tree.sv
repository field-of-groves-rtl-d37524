// tb_decision_tree: a depth-3 tree is programmed with random feature offsets,
// weights and leaf vectors, then walked over random inputs held in a
// testbench memory. The reached leaf's vector is compared with a reference
// walk, and done must come DEPTH+1 cycles after start.
module tb_decision_tree;
  import fog_pkg::*;
  localparam int D = 3, AW = 8, NN = (1 << D) - 1, NL = 1 << D, NF = 12;
  logic clk = 0, rst_n = 0;
  logic node_we = 0, leaf_we = 0;
  logic [D-1:0] idx = 0;
  logic [OFF_W-1:0] off = 0;
  byte_t w = 0;
  logic [CLASS_W-1:0] cls = 0;
  logic start = 0;
  logic [AW-1:0] base = 0;
  logic [AW-1:0] feat_addr;
  byte_t feat_data;
  logic busy, done;
  prob_vec_t leaf_prob;
  byte_t mem [256];
  int m_off [NN], m_w [NN];
  byte_t m_leaf [NL][MAX_CLASSES];
  int checks = 0, failures = 0;

  decision_tree #(.DEPTH(D), .AW(AW)) dut (.*);
  assign feat_data = mem[feat_addr];
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NN; i++) begin
      m_off[i] = $urandom_range(NF - 1); m_w[i] = $urandom_range(255);
      @(negedge clk); node_we = 1; idx = D'(i); off = OFF_W'(m_off[i]); w = byte_t'(m_w[i]);
    end
    for (int l = 0; l < NL; l++)
      for (int c = 0; c < MAX_CLASSES; c++) begin
        m_leaf[l][c] = byte_t'($urandom);
        @(negedge clk); node_we = 0; leaf_we = 1; idx = D'(l); cls = CLASS_W'(c); w = m_leaf[l][c];
      end
    @(negedge clk); leaf_we = 0;
    for (int n = 0; n < 200; n++) begin
      int nd, lat;
      base = AW'($urandom_range(200));
      for (int i = 0; i < 256; i++) mem[i] = byte_t'($urandom);
      nd = 0;
      for (int d = 0; d < D; d++)
        nd = (mem[base + 1 + m_off[nd]] > m_w[nd]) ? 2 * nd + 2 : 2 * nd + 1;
      nd -= NN;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 50) begin @(negedge clk); lat++; end
      checks++;
      if (lat != D + 1) begin failures++; $display("FAIL latency %0d", lat); end
      for (int c = 0; c < MAX_CLASSES; c++) begin
        checks++;
        if (leaf_prob[c] !== m_leaf[nd][c]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d leaf %0d class %0d got %0d exp %0d", n, nd, c, leaf_prob[c], m_leaf[nd][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
