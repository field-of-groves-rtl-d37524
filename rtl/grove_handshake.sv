// grove_handshake: the outgoing side of a grove's "Handshake" block.
//
// It holds one entry that is leaving the grove. The grove fills it byte by
// byte (wr_en/wr_idx/wr_byte) and then either
//   send_next - raises req to the next grove and holds the entry on data; the
//               next grove copies it and answers with a one-cycle ack, on
//               which req is lowered (the paper's req/ack protocol), or
//   send_out  - offers result_in to the accelerator's output queue with a
//               valid/ready handshake (the result is taken when both are 1).
// busy is high while either is pending; the grove starts no new computation
// while busy, so at most one entry waits here. req and res_valid rise on the
// edge after the send pulse. The req/ack sequence is the paper's; the holding
// register, the byte-wide fill and the output valid/ready are this design's
// choices.
module grove_handshake
  import fog_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // fill
  input  logic               wr_en,
  input  logic [GAMMA_W-1:0] wr_idx,
  input  byte_t              wr_byte,
  input  logic               send_next,
  input  logic               send_out,
  input  result_t            result_in,
  output logic               busy,
  // link to the next grove
  output logic               req,
  input  logic               ack,
  output entry_t             data,
  // output queue
  output logic               res_valid,
  input  logic               res_ready,
  output result_t            result
);
  always_ff @(posedge clk) begin
    if (wr_en) data[wr_idx] <= wr_byte;
    if (send_out) result <= result_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req       <= 1'b0;
      res_valid <= 1'b0;
    end else begin
      if (send_next)    req <= 1'b1;
      else if (ack)     req <= 1'b0;
      if (send_out)                   res_valid <= 1'b1;
      else if (res_valid && res_ready) res_valid <= 1'b0;
    end
  end

  assign busy = req | res_valid;

  a_no_send_busy: assert property (@(posedge clk) disable iff (!rst_n)
                    (send_next || send_out) |-> !busy);
  a_no_fill_busy: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !req);
  a_one_send:     assert property (@(posedge clk) disable iff (!rst_n) !(send_next && send_out));
endmodule
