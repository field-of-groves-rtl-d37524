// grove_link_if: the link from one grove to the next one in the ring.
// The sender raises req and holds data (a whole queue entry) stable; the
// receiver copies the entry into its own queue and then raises ack for exactly
// one cycle; the sender lowers req on that cycle's clock edge. The signal set
// (req, ack, data) is the one drawn for the grove handshake; the data width
// (a full entry) is this design's choice.
interface grove_link_if (input logic clk, input logic rst_n);
  import fog_pkg::*;
  logic   req;
  logic   ack;
  entry_t data;

  modport sender   (output req, output data, input ack);
  modport receiver (input req, input data, output ack);

  // ack only answers a pending request and lasts one cycle
  a_ack_needs_req: assert property (@(posedge clk) disable iff (!rst_n) ack |-> req);
  a_ack_one_cycle: assert property (@(posedge clk) disable iff (!rst_n) ack |=> !ack);
  // the entry stays put while it is being copied
  a_data_stable:   assert property (@(posedge clk) disable iff (!rst_n) (req && !ack) |=> $stable(data));
endinterface
