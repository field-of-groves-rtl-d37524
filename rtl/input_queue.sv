// input_queue: the accelerator's input queue and dispatcher.
//
// The processor offers one input (its feature bytes) at a time with
// in_valid/in_ready. Each accepted input is given the next id (an 8-bit count)
// and packed as a fresh queue entry {hops = 0, features, id, probabilities = 0}
// using the run-time gamma and n_classes, then buffered in a DEPTH-entry FIFO.
// The entry at the head is sent to one grove: a 16-bit LFSR picks a random
// starting grove, and the first grove from there (going round the ring) that
// reports room (grove_space) becomes the target. grove_req[target] stays high
// with the entry on entry_out until that grove pulses grove_ack, then the FIFO
// pops and the LFSR steps. target is picked in the cycle after the head appears.
// Assigning an id and starting each input at a random grove are the paper's;
// the FIFO depth, the LFSR and the skip-full-groves rule are this design's.
module input_queue
  import fog_pkg::*;
#(
  parameter int unsigned N     = N_GROVES,
  parameter int unsigned DEPTH = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_t                   cfg,
  // processor side
  input  logic                   in_valid,
  output logic                   in_ready,
  input  features_t              in_features,
  // grove side
  input  logic [N-1:0]           grove_space,
  output logic [N-1:0]           grove_req,
  input  logic [N-1:0]           grove_ack,
  output entry_t                 entry_out,
  output logic [((N > 1) ? $clog2(N) : 1)-1:0] target
);
  localparam int unsigned TW = (N > 1) ? $clog2(N) : 1;

  entry_t         new_entry;
  byte_t          next_id;
  logic           empty, full, pop;
  logic           tgt_valid;
  logic [15:0]    lfsr;
  logic [TW-1:0]  cand;
  logic           cand_ok;
  logic [GAMMA_W-1:0] n_feat;

  assign n_feat = cfg.gamma - GAMMA_W'(cfg.n_classes) - GAMMA_W'(2);

  always_comb begin
    new_entry = '0;
    for (int f = 0; f < MAX_FEATURES; f++)
      if (f < int'(n_feat)) new_entry[1 + f] = in_features[f];
    new_entry[n_feat + 1'b1] = next_id;
  end

  assign in_ready = !full;

  sync_fifo #(.T(entry_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .push  (in_valid && in_ready),
    .din   (new_entry),
    .pop,
    .dout  (entry_out),
    .empty, .full
  );

  // first grove with room, starting from the random grove lfsr % N
  always_comb begin
    logic [TW-1:0] start;
    logic [TW:0]   g;
    start   = TW'(lfsr % 16'(N));
    cand    = '0;
    cand_ok = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      g = (TW+1)'(start) + (TW+1)'(i);
      if (g >= (TW+1)'(N)) g = g - (TW+1)'(N);
      if (grove_space[g[TW-1:0]]) begin
        cand    = g[TW-1:0];
        cand_ok = 1'b1;
      end
    end
  end

  assign pop = tgt_valid && grove_ack[target];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_id   <= '0;
      tgt_valid <= 1'b0;
      target    <= '0;
      lfsr      <= 16'hACE1;
    end else begin
      if (in_valid && in_ready) next_id <= next_id + 1'b1;
      if (pop) begin
        tgt_valid <= 1'b0;
        lfsr      <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
      end else if (!tgt_valid && !empty && cand_ok) begin
        tgt_valid <= 1'b1;
        target    <= cand;
      end
    end
  end

  always_comb begin
    grove_req = '0;
    if (tgt_valid) grove_req[target] = 1'b1;
  end

  a_ack_when_req: assert property (@(posedge clk) disable iff (!rst_n)
                    (grove_ack & ~grove_req) == '0);
endmodule
