// df_in_reg: one input port of a dataflow operator.
//
// Holds the 16-bit input register (dadoa / dadob in the ADD datapath) and its
// 1-bit status flag (bita / bitb).  While the operator controller asserts
// `en` (state S1) and the port is empty, a strobe on `str` loads `din` into
// the register on the next clock edge and sets the status flag.
//
// The acknowledge `ack` is a register: 1 means busy, 0 means ready.  It is 1
// from reset until the controller pulses `arm` on start (the "enable" of the
// communication), is set together with the status flag when a token is
// taken, and is cleared again with the flag by `clr` (state S3).  Outside
// state S0 it therefore always equals the status flag, so a sender that sees
// str = 1 and ack = 0 at a clock edge knows the token was taken at that edge.
//
// Timing: a token presented with str = 1 while ack = 0 is captured at that
// clock edge; `full` and `ack` are 1 from the following cycle.
module df_in_reg
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  arm,    // start: open the port (ack <- 0)
  input  logic  en,     // controller is in the receive state
  input  logic  clr,    // controller clears the port (S3)
  input  data_t din,    // data bus from the sender
  input  logic  str,    // strobe from the sender
  output logic  ack,    // acknowledge to the sender, 1 = busy
  output data_t q,      // stored token
  output logic  full    // status bit: a token is stored
);

  logic take;
  assign take = en && str && !full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q    <= '0;
      full <= 1'b0;
      ack  <= 1'b1;
    end else if (arm || clr) begin
      full <= 1'b0;
      ack  <= 1'b0;
    end else if (take) begin
      q    <= din;
      full <= 1'b1;
      ack  <= 1'b1;
    end
  end

endmodule
