// tb_fog_ctrl: checks the reset settings (MNIST defaults), writes each
// setting register and checks cfg, and writes random node and leaf words and
// checks the decoded one-cycle prog strobe field by field.
module tb_fog_ctrl;
  import fog_pkg::*;
  logic clk = 0, rst_n = 0;
  logic reg_we = 0;
  logic [3:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0;
  cfg_t cfg;
  prog_t prog;
  int checks = 0, failures = 0;
  localparam int IDX_LSB = 8 + OFF_W, TREE_LSB = IDX_LSB + NODE_W, GROVE_LSB = TREE_LSB + TREE_W;

  fog_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = 4'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("reset thresh", cfg.thresh == 26);
    chk("reset max_hops", cfg.max_hops == N_GROVES);
    chk("reset gamma", cfg.gamma == 796);
    chk("reset classes", cfg.n_classes == 10);
    chk("reset entries", cfg.q_entries == 8);
    for (int n = 0; n < 50; n++) begin
      automatic int t = $urandom_range(255), h = $urandom_range(1, 8), g = $urandom_range(20, 812),
          c = $urandom_range(2, 26), e = $urandom_range(2, 200);
      wr(0, t); wr(1, h); wr(2, g); wr(3, c); wr(4, e);
      chk("thresh", cfg.thresh == t);
      chk("max_hops", cfg.max_hops == h);
      chk("gamma", cfg.gamma == g);
      chk("classes", cfg.n_classes == c);
      chk("entries", cfg.q_entries == e);
      chk("no strobe", !prog.node_we && !prog.leaf_we);
    end
    for (int n = 0; n < 200; n++) begin
      automatic logic [31:0] d = $urandom;
      automatic bit leaf = n[0];
      @(negedge clk); reg_we = 1; reg_addr = leaf ? 4'd6 : 4'd5; reg_wdata = d;
      @(negedge clk); reg_we = 0;
      chk("strobe", prog.node_we == !leaf && prog.leaf_we == leaf);
      chk("w", prog.w == d[7:0]);
      chk("off", prog.off == d[8 +: OFF_W]);
      chk("cls", prog.cls == d[8 +: CLASS_W]);
      chk("idx", prog.idx == d[IDX_LSB +: NODE_W]);
      chk("tree", prog.tree == d[TREE_LSB +: TREE_W]);
      chk("grove", prog.grove == d[GROVE_LSB +: GROVE_W]);
      @(negedge clk);
      chk("strobe one cycle", !prog.node_we && !prog.leaf_we);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
