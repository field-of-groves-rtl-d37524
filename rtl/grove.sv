// grove: one grove of the Field of Groves - a small random forest of N_TREES
// decision trees with its own data queue, processing element and handshake.
//
// Inputs arrive as whole queue entries from two sides:
//   * from the previous grove (from_prev, req/ack): a partially classified
//     entry, written in front of the current front entry so it is served first;
//   * from the accelerator input queue (in_req/in_entry/in_ack): a new input,
//     written at the back of the queue.
// The processing element (PE) takes the front entry: all trees walk it in
// parallel, prob_combine averages their leaves and folds the result into the
// entry's probability array, and minmax_conf gives the confidence. The new hop
// count and probability array are written back into the entry. If the
// confidence reaches the threshold, or the hop count reaches max_hops, the
// result goes to the output queue; otherwise the entry is copied into the
// handshake register and sent to the next grove. Either way it leaves the queue.
//
// Control is one state machine, so the queue's single write port has one user
// at a time. Priority when idle: copy from the previous grove, then run the PE
// (only if the handshake register is free), then accept a new input (only if
// two entries are free, which keeps one place for ring traffic so the ring
// cannot fill up and dead-lock).
// Timing, gamma = entry bytes, C = n_classes, D = tree depth:
//   copy in          gamma + 2 cycles (copy, then one ack cycle, then idle)
//   PE               D + 2 cycles from start to the combined result
//   write back       C + 1 cycles (hop byte and C probability bytes)
//   copy out         gamma cycles into the handshake register
// A new input seen by an idle grove gives res_valid gamma + D + C + 5 cycles
// later, or req to the next grove 2*gamma + D + C + 5 cycles later.
// The queue/PE/handshake structure, front/back placement, write-back and the
// threshold / max-hops tests follow the paper. The serial byte copies, the
// priority order and the two-free-entries rule are this design's choices.
module grove
  import fog_pkg::*;
#(
  parameter int unsigned GROVE_ID = 0,
  parameter int unsigned N_TREES  = TREES_PER_GROVE,
  parameter int unsigned DEPTH    = TREE_DEPTH,
  parameter int unsigned BYTES    = QUEUE_BYTES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  prog_t         prog,
  // ring
  grove_link_if.receiver from_prev,
  grove_link_if.sender   to_next,
  // new inputs from the input queue
  input  logic          in_req,
  input  entry_t        in_entry,
  output logic          in_ack,
  output logic          in_space,
  // finished results to the output queue
  output logic          res_valid,
  input  logic          res_ready,
  output result_t       result,
  output byte_t         count
);
  localparam int unsigned AW   = $clog2(BYTES);
  localparam int unsigned N_RD = N_TREES + 2 + MAX_CLASSES;
  localparam int unsigned P_HOP = N_TREES;       // read port of the hop byte
  localparam int unsigned P_ID  = N_TREES + 1;   // read port of the id byte
  localparam int unsigned P_PRB = N_TREES + 2;   // first probability read port

  typedef enum logic [2:0] {
    S_IDLE, S_CP_FRONT, S_ACK_FRONT, S_CP_BACK, S_ACK_BACK, S_PE, S_WB, S_LOAD
  } state_t;

  state_t             state;
  logic [GAMMA_W-1:0] k;
  logic [AW-1:0]      fr, bk, fr_prev;
  logic               push_back, push_front, pop_front;
  logic               we;
  logic [AW-1:0]      waddr;
  byte_t              wdata;
  logic [AW-1:0]      raddr [N_RD];
  byte_t              rdata [N_RD];
  logic [AW-1:0]      prob_base;   // address of the probability array in the front entry

  // PE
  logic               tree_start;
  logic [N_TREES-1:0] tree_done;
  logic [AW-1:0]      feat_addr [N_TREES];
  prob_vec_t          leaf_prob [N_TREES];
  prob_vec_t          old_prob, grove_prob, new_prob;
  byte_t              max1, max2, conf, label;

  // results held during write back
  prob_vec_t          np_q;
  byte_t              nh_q, conf_q, label_q, id_q;
  logic               finished;

  // handshake register
  logic               hs_wr, hs_send_next, hs_send_out, hs_busy;
  result_t            hs_result;

  data_queue #(.BYTES(BYTES), .N_RD(N_RD)) u_queue (
    .clk, .rst_n,
    .gamma     (cfg.gamma),
    .q_entries (cfg.q_entries),
    .push_back, .push_front, .pop_front,
    .fr, .bk, .fr_prev, .count,
    .we, .waddr, .wdata, .raddr, .rdata
  );

  for (genvar t = 0; t < N_TREES; t++) begin : g_tree
    logic sel;
    assign sel = (prog.grove == GROVE_W'(GROVE_ID)) && (prog.tree == TREE_W'(t));
    decision_tree #(.DEPTH(DEPTH), .AW(AW)) u_tree (
      .clk, .rst_n,
      .node_we   (prog.node_we & sel),
      .leaf_we   (prog.leaf_we & sel),
      .idx       (prog.idx[DEPTH-1:0]),
      .off       (prog.off),
      .w         (prog.w),
      .cls       (prog.cls),
      .start     (tree_start),
      .base      (fr),
      .feat_addr (feat_addr[t]),
      .feat_data (rdata[t]),
      .busy      (),
      .done      (tree_done[t]),
      .leaf_prob (leaf_prob[t])
    );
  end

  assign prob_base = fr + AW'(cfg.gamma) - AW'(cfg.n_classes);

  // read ports: trees (port 0 doubles as the copy-out port), hops, id, probabilities
  always_comb begin
    for (int t = 0; t < N_TREES; t++) raddr[t] = feat_addr[t];
    if (state == S_LOAD) raddr[0] = fr + AW'(k);
    raddr[P_HOP] = fr;
    raddr[P_ID]  = prob_base - AW'(1);
    for (int c = 0; c < MAX_CLASSES; c++) begin
      raddr[P_PRB + c] = (c < int'(cfg.n_classes)) ? prob_base + AW'(c) : fr;
      old_prob[c]      = (c < int'(cfg.n_classes)) ? rdata[P_PRB + c] : '0;
    end
  end

  prob_combine #(.N_TREES(N_TREES)) u_combine (
    .leaf_prob, .old_prob,
    .hops      (rdata[P_HOP]),
    .n_classes (cfg.n_classes),
    .grove_prob, .new_prob
  );

  minmax_conf u_minmax (
    .prob (new_prob), .n_classes (cfg.n_classes),
    .max1, .max2, .conf, .label
  );

  assign finished = (conf_q >= cfg.thresh) || (nh_q >= cfg.max_hops);

  // state machine outputs
  always_comb begin
    push_back    = 1'b0;
    push_front   = 1'b0;
    pop_front    = 1'b0;
    we           = 1'b0;
    waddr        = fr;
    wdata        = '0;
    tree_start   = 1'b0;
    hs_wr        = 1'b0;
    hs_send_next = 1'b0;
    hs_send_out  = 1'b0;
    from_prev.ack = 1'b0;
    in_ack       = 1'b0;
    unique case (state)
      S_IDLE: begin
        if (!(from_prev.req && count < cfg.q_entries) && count != 0 && !hs_busy)
          tree_start = 1'b1;
      end
      S_CP_FRONT: begin
        we    = 1'b1;
        waddr = fr_prev + AW'(k);
        wdata = from_prev.data[k];
      end
      S_ACK_FRONT: begin
        from_prev.ack = 1'b1;
        push_front    = 1'b1;
      end
      S_CP_BACK: begin
        we    = 1'b1;
        waddr = bk + AW'(k);
        wdata = in_entry[k];
      end
      S_ACK_BACK: begin
        in_ack    = 1'b1;
        push_back = 1'b1;
      end
      S_PE: ;
      S_WB: begin
        we = 1'b1;
        if (k == '0) begin
          waddr = fr;
          wdata = nh_q;
        end else begin
          waddr = prob_base + AW'(k) - AW'(1);
          wdata = np_q[k - 1'b1];
        end
        if (k == GAMMA_W'(cfg.n_classes) && finished) begin
          hs_send_out = 1'b1;
          pop_front   = 1'b1;
        end
      end
      S_LOAD: begin
        hs_wr = 1'b1;
        if (k == cfg.gamma - 1'b1) begin
          hs_send_next = 1'b1;
          pop_front    = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k       <= '0;
      np_q    <= '0;
      nh_q    <= '0;
      conf_q  <= '0;
      label_q <= '0;
      id_q    <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          k <= '0;
          if (from_prev.req && count < cfg.q_entries) state <= S_CP_FRONT;
          else if (count != 0 && !hs_busy)            state <= S_PE;
          else if (in_req && in_space)                state <= S_CP_BACK;
        end
        S_CP_FRONT: begin
          k <= k + 1'b1;
          if (k == cfg.gamma - 1'b1) state <= S_ACK_FRONT;
        end
        S_ACK_FRONT: state <= S_IDLE;
        S_CP_BACK: begin
          k <= k + 1'b1;
          if (k == cfg.gamma - 1'b1) state <= S_ACK_BACK;
        end
        S_ACK_BACK: state <= S_IDLE;
        S_PE: begin
          if (tree_done[0]) begin
            np_q    <= new_prob;
            nh_q    <= rdata[P_HOP] + 1'b1;
            conf_q  <= conf;
            label_q <= label;
            id_q    <= rdata[P_ID];
            k       <= '0;
            state   <= S_WB;
          end
        end
        S_WB: begin
          k <= k + 1'b1;
          if (k == GAMMA_W'(cfg.n_classes)) begin
            k     <= '0;
            state <= finished ? S_IDLE : S_LOAD;
          end
        end
        S_LOAD: begin
          k <= k + 1'b1;
          if (k == cfg.gamma - 1'b1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_space  = (9'(count) + 9'd2) <= 9'(cfg.q_entries);
  assign hs_result = '{id: id_q, label: label_q, hops: nh_q, conf: conf_q, prob: np_q};

  grove_handshake u_hs (
    .clk, .rst_n,
    .wr_en     (hs_wr),
    .wr_idx    (k),
    .wr_byte   (rdata[0]),
    .send_next (hs_send_next),
    .send_out  (hs_send_out),
    .result_in (hs_result),
    .busy      (hs_busy),
    .req       (to_next.req),
    .ack       (to_next.ack),
    .data      (to_next.data),
    .res_valid,
    .res_ready,
    .result
  );

  // all trees of a grove finish together
  a_trees_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                     tree_done[0] |-> &tree_done);
endmodule
