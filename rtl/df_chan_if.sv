// df_chan_if: one arc of a dataflow graph: a 16-bit data bus plus the strobe
// (str, sender to receiver, 1 = token on the bus) and acknowledge (ack,
// receiver to sender, 0 = ready, 1 = busy) wires.  A token moves at a clock
// edge where str = 1 and ack = 0.
//
// The assertions state the sender's side of the handshake: once a strobe is
// raised it stays up, with the data unchanged, until the token is taken.
interface df_chan_if
  import df_pkg::*;
(
  input logic clk,
  input logic rst_n
);
  data_t data;
  logic  str;
  logic  ack;

  // A token that has not been taken stays on the bus unchanged.
  a_hold_str : assert property (@(posedge clk) disable iff (!rst_n)
    (str && ack) |=> str);
  a_hold_data : assert property (@(posedge clk) disable iff (!rst_n)
    (str && ack) |=> $stable(data));

endinterface
