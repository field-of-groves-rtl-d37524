// data_queue: the local memory of a grove and its data queue controller (DQC).
//
// The memory is QUEUE_BYTES bytes, byte addressed. It holds a circular queue
// of entries of gamma bytes each ({hops, input payload + id, probability
// array}); gamma and the number of entries q_entries are run-time settings, so
// the same memory serves datasets with different feature and label counts.
// The DQC keeps two byte pointers:
//   fr  - the entry at the front, the one the processing element works on
//   bk  - the first free location at the back
// Both move in steps of gamma and wrap at q_entries * gamma.
//   push_back   an input from the processor has been written at bk: bk += gamma
//   push_front  an entry from the neighbouring grove has been written at
//               fr_prev = fr - gamma: fr moves back onto it, so partially
//               computed inputs are served first
//   pop_front   the front entry has left the grove: fr += gamma
// Each op takes effect at the clock edge; count, fr and bk update together.
// One byte write port (we/waddr/wdata) and N_RD combinational read ports.
// Reset empties the queue; memory contents are not reset (only written
// locations are ever read). gamma and q_entries may change only while the
// queue is empty; a change returns both pointers to byte 0 so that entries of
// the new length stay aligned to the wrap point. The pointer scheme follows the paper; wrap-around
// and the separate capacity setting are this design's choices.
module data_queue
  import fog_pkg::*;
#(
  parameter int unsigned BYTES = QUEUE_BYTES,
  parameter int unsigned N_RD  = TREES_PER_GROVE + MAX_CLASSES + 2,
  localparam int unsigned AW   = $clog2(BYTES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [GAMMA_W-1:0] gamma,
  input  byte_t              q_entries,
  // pointer operations
  input  logic               push_back,
  input  logic               push_front,
  input  logic               pop_front,
  output logic [AW-1:0]      fr,
  output logic [AW-1:0]      bk,
  output logic [AW-1:0]      fr_prev,
  output byte_t              count,
  // memory ports
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  byte_t              wdata,
  input  logic [AW-1:0]      raddr [N_RD],
  output byte_t              rdata [N_RD]
);
  byte_t mem [BYTES];

  logic [AW:0] limit;       // q_entries * gamma, one past the last queue byte
  logic [AW:0] fr_step, bk_step;
  logic [GAMMA_W-1:0] gamma_q;     // settings the pointers are aligned to
  byte_t              entries_q;
  logic               realign;

  assign limit   = (AW+1)'(q_entries * gamma);
  assign fr_step = {1'b0, fr} + (AW+1)'(gamma);
  assign bk_step = {1'b0, bk} + (AW+1)'(gamma);
  assign fr_prev = ({1'b0, fr} < (AW+1)'(gamma)) ? AW'(limit - (AW+1)'(gamma) + {1'b0, fr})
                                                 : AW'({1'b0, fr} - (AW+1)'(gamma));

  assign realign = (gamma != gamma_q) || (q_entries != entries_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fr        <= '0;
      bk        <= '0;
      count     <= '0;
      gamma_q   <= gamma;
      entries_q <= q_entries;
    end else if (realign) begin
      fr        <= '0;
      bk        <= '0;
      gamma_q   <= gamma;
      entries_q <= q_entries;
    end else begin
      if (push_back)  bk <= (bk_step >= limit) ? AW'(bk_step - limit) : AW'(bk_step);
      if (push_front) fr <= fr_prev;
      else if (pop_front) fr <= (fr_step >= limit) ? AW'(fr_step - limit) : AW'(fr_step);
      count <= count + byte_t'(push_back) + byte_t'(push_front) - byte_t'(pop_front);
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int i = 0; i < N_RD; i++) rdata[i] = mem[raddr[i]];
  end

  // the controller never overfills or underflows the queue
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                    (push_back || push_front) |-> (count < q_entries));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                    pop_front |-> (count != 0));
  a_one_push:     assert property (@(posedge clk) disable iff (!rst_n)
                    !(push_back && push_front));
  a_cfg_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
                    realign |-> (count == 0 && !push_back && !push_front && !pop_front));
  a_pop_alone:    assert property (@(posedge clk) disable iff (!rst_n)
                    pop_front |-> !(push_back || push_front));
endmodule
