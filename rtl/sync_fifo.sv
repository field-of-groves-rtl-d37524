// sync_fifo: single-clock first-in first-out buffer of DEPTH words of type T,
// used by the accelerator's input and output queues. Write when push and not
// full; the head word is on dout whenever not empty and leaves on pop.
// Storage is a register array read combinationally; reset empties it.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic empty,
  output logic full
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [PW:0]   cnt;

  assign empty = (cnt == 0);
  assign full  = (cnt == (PW+1)'(DEPTH));
  assign dout  = mem[rd];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push && !full) mem[wr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else begin
      if (push && !full) wr <= inc(wr);
      if (pop && !empty) rd <= inc(rd);
      cnt <= cnt + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
