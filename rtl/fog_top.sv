// fog_top: the Field of Groves (FoG) random-forest accelerator.
//
// A trained random forest of N_GROVES * TREES_PER_GROVE decision trees is cut
// into N_GROVES groves of TREES_PER_GROVE trees, connected in a ring. Each
// input starts at a random grove. A grove averages its trees' class
// probabilities into the input's running probability array; if the gap
// between the two most probable labels reaches the threshold, or max_hops
// groves have seen the input, the result is returned, otherwise the input and
// its probabilities move to the next grove. Easy inputs thus cost one grove,
// hard ones up to the whole forest, and the threshold trades accuracy for
// energy at run time.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//   reg_*      control-unit register writes (settings and tree programming)
//   in_*       processor -> input queue, valid/ready, one input per transfer
//   out_*      output queue -> processor, valid/ready, one result per transfer
// The processor, its caches, the accelerator L2 and the CPU-accelerator link
// around this block are not modelled; these ports stand where they connect.
module fog_top
  import fog_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [3:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  input  logic        in_valid,
  output logic        in_ready,
  input  features_t   in_features,
  output logic        out_valid,
  input  logic        out_ready,
  output result_t     out_result
);
  cfg_t                 cfg;
  prog_t                prog;
  entry_t               in_entry;
  logic [N_GROVES-1:0]  grove_space, grove_req, grove_ack;
  logic [N_GROVES-1:0]  res_valid, res_ready;
  result_t              res [N_GROVES];
  logic [GROVE_W-1:0]   target;

  fog_ctrl u_ctrl (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .cfg, .prog
  );

  input_queue #(.N(N_GROVES)) u_inq (
    .clk, .rst_n, .cfg,
    .in_valid, .in_ready, .in_features,
    .grove_space, .grove_req, .grove_ack,
    .entry_out (in_entry),
    .target
  );

  grove_link_if link [N_GROVES] (clk, rst_n);

  for (genvar g = 0; g < N_GROVES; g++) begin : g_grove
    grove #(.GROVE_ID(g)) u_grove (
      .clk, .rst_n, .cfg, .prog,
      .from_prev (link[(g + N_GROVES - 1) % N_GROVES]),
      .to_next   (link[g]),
      .in_req    (grove_req[g]),
      .in_entry  (in_entry),
      .in_ack    (grove_ack[g]),
      .in_space  (grove_space[g]),
      .res_valid (res_valid[g]),
      .res_ready (res_ready[g]),
      .result    (res[g]),
      .count     ()
    );
  end

  output_queue #(.N(N_GROVES)) u_outq (
    .clk, .rst_n,
    .res_valid, .res_ready, .res,
    .out_valid, .out_ready, .out_result
  );
endmodule
