// fog_ctrl: the accelerator's control unit.
//
// The processor writes 32-bit registers (reg_we, reg_addr, reg_wdata); the
// write takes effect on the next clock edge.
//   0  thresh     confidence threshold (255 = 1.0)         reset 26  (~0.1)
//   1  max_hops   upper limit on groves per input           reset N_GROVES
//   2  gamma      queue word length in bytes = F + C + 2    reset 796 (MNIST)
//   3  n_classes  labels C                                  reset 10  (MNIST)
//   4  q_entries  entries each grove queue may hold         reset 8
//   5  node       write one tree node:  w = [7:0], feature offset above it,
//                 then node index, tree, grove (fields packed upward)
//   6  leaf       write one leaf byte:  probability = [7:0], class in the
//                 offset field, then leaf index, tree, grove
// Node and leaf writes become a one-cycle prog strobe broadcast to the groves.
// The run-time knobs (threshold, maximum hops), programmable nodes and
// programmable Gamma are from the paper; the register map is this design's.
module fog_ctrl
  import fog_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [3:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output cfg_t        cfg,
  output prog_t       prog
);
  localparam int unsigned OFF_LSB   = 8;
  localparam int unsigned IDX_LSB   = OFF_LSB + OFF_W;
  localparam int unsigned TREE_LSB  = IDX_LSB + NODE_W;
  localparam int unsigned GROVE_LSB = TREE_LSB + TREE_W;

  initial begin
    if (GROVE_LSB + GROVE_W > 32) $error("programming word does not fit 32 bits");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.thresh    <= 8'd26;
      cfg.max_hops  <= byte_t'(N_GROVES);
      cfg.gamma     <= GAMMA_W'(784 + 10 + 2);
      cfg.n_classes <= (CLASS_W+1)'(10);
      cfg.q_entries <= 8'd8;
      prog          <= '0;
    end else begin
      prog.node_we <= 1'b0;
      prog.leaf_we <= 1'b0;
      if (reg_we) begin
        unique case (reg_addr)
          4'd0: cfg.thresh    <= reg_wdata[7:0];
          4'd1: cfg.max_hops  <= reg_wdata[7:0];
          4'd2: cfg.gamma     <= reg_wdata[GAMMA_W-1:0];
          4'd3: cfg.n_classes <= reg_wdata[CLASS_W:0];
          4'd4: cfg.q_entries <= reg_wdata[7:0];
          4'd5, 4'd6: begin
            prog.node_we <= (reg_addr == 4'd5);
            prog.leaf_we <= (reg_addr == 4'd6);
            prog.w       <= reg_wdata[7:0];
            prog.off     <= reg_wdata[OFF_LSB +: OFF_W];
            prog.cls     <= reg_wdata[OFF_LSB +: CLASS_W];
            prog.idx     <= reg_wdata[IDX_LSB +: NODE_W];
            prog.tree    <= reg_wdata[TREE_LSB +: TREE_W];
            prog.grove   <= reg_wdata[GROVE_LSB +: GROVE_W];
          end
          default: ;
        endcase
      end
    end
  end
endmodule
