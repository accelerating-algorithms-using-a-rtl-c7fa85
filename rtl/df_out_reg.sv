// df_out_reg: one output port of a dataflow operator.
//
// Holds the 16-bit result register (dadoz in the ADD datapath) and its status
// bit (bitz), which drives the strobe `str` towards the receiver.  `load`
// (state S2) writes the result and raises the strobe.  The token is taken at
// the first clock edge at which str = 1 and the receiver's ack = 0; the strobe
// drops at that edge.  `taken` flags that edge, combinationally, for the
// controller.
module df_out_reg
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,   // controller loads a result (S2)
  input  data_t d,      // result to send
  input  logic  ack,    // acknowledge from the receiver, 1 = busy
  output data_t z,      // data bus to the receiver
  output logic  str,    // strobe to the receiver (bitz)
  output logic  taken   // the receiver takes the token at this edge
);

  assign taken = str && !ack;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      z   <= '0;
      str <= 1'b0;
    end else if (load) begin
      z   <= d;
      str <= 1'b1;
    end else if (taken) begin
      str <= 1'b0;
    end
  end

endmodule
