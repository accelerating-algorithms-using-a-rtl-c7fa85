// df_copy: copy dataflow operator.  One input arc a, two output arcs z1 and z2.
//
// The operator takes a token on a (S1), loads it into both output registers
// and raises strz1 and strz2 (S2), then waits until each receiver has taken
// its copy; the two receivers may take them in different cycles.  When both
// copies are gone, S3 clears bita/acka and the operator returns to S1.
// The controller is the S0..S3 machine of the paper's operator ASM chart.
//
// Timing: with idle receivers both copies are offered two cycles after the
// edge that captured the input token.
module df_copy
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t a,
  input  logic  stra,
  output logic  acka,
  output data_t z1,
  output logic  strz1,
  input  logic  ackz1,
  output data_t z2,
  output logic  strz2,
  input  logic  ackz2
);

  op_state_e state, state_n;
  data_t     qa;
  logic      bita, taken1, taken2;
  logic      arm, en, clr, load, done;

  assign arm  = (state == ST_S0) && start;
  assign en   = (state == ST_S1);
  assign clr  = (state == ST_S3);
  assign load = (state == ST_S2);
  // both copies gone, or leaving at this edge
  assign done = (!strz1 || taken1) && (!strz2 || taken2);

  df_in_reg  u_a  (.clk, .rst_n, .arm, .en, .clr, .din(a), .str(stra), .ack(acka), .q(qa), .full(bita));
  df_out_reg u_z1 (.clk, .rst_n, .load, .d(qa), .ack(ackz1), .z(z1), .str(strz1), .taken(taken1));
  df_out_reg u_z2 (.clk, .rst_n, .load, .d(qa), .ack(ackz2), .z(z2), .str(strz2), .taken(taken2));

  always_comb begin
    state_n = state;
    case (state)
      ST_S0:      if (start) state_n = ST_S1;
      ST_S1:      if (bita) state_n = ST_S2;
      ST_S2:      state_n = ST_S2_WAIT;
      ST_S2_WAIT: if (done) state_n = ST_S3;
      ST_S3:      state_n = ST_S1;
      default:    state_n = ST_S0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= ST_S0;
    else        state <= state_n;
  end

endmodule
