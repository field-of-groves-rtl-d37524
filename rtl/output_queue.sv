// output_queue: the accelerator's output queue.
//
// Every grove can finish an input; their results (valid/ready each) are
// granted one per cycle by a round-robin arbiter and buffered in a DEPTH-entry
// FIFO that the processor drains with out_valid/out_ready. A grove's result is
// taken in the cycle its ready is high; the next search starts after the grove
// last granted. The paper only names this queue; the arbiter, FIFO and depth
// are this design's choices.
module output_queue
  import fog_pkg::*;
#(
  parameter int unsigned N     = N_GROVES,
  parameter int unsigned DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  res_valid,
  output logic [N-1:0]  res_ready,
  input  result_t       res [N],
  output logic          out_valid,
  input  logic          out_ready,
  output result_t       out_result
);
  localparam int unsigned GW = (N > 1) ? $clog2(N) : 1;

  logic [GW-1:0] rr, gnt;
  logic          any, empty, full;

  always_comb begin
    logic [GW:0] g;
    gnt = '0;
    any = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      g = (GW+1)'(rr) + (GW+1)'(i);
      if (g >= (GW+1)'(N)) g = g - (GW+1)'(N);
      if (res_valid[g[GW-1:0]]) begin
        gnt = g[GW-1:0];
        any = 1'b1;
      end
    end
    res_ready = '0;
    if (any && !full) res_ready[gnt] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (any && !full) rr <= (gnt == GW'(N - 1)) ? '0 : gnt + 1'b1;
  end

  sync_fifo #(.T(result_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .push  (any && !full),
    .din   (res[gnt]),
    .pop   (out_valid && out_ready),
    .dout  (out_result),
    .empty, .full
  );
  assign out_valid = !empty;
endmodule
