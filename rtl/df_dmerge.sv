// df_dmerge: deterministic (controlled) merge dataflow operator.  Inputs:
// arc a (the TRUE side), arc b (the FALSE side) and control arc c.  Output:
// arc z.
//
// Like every operator of the paper's architecture, the merge fires only when
// all three input registers hold a token.  It then sends a when the control
// token is TRUE and b when it is FALSE, and consumes all three input tokens:
// the "before/after" picture of the operator shows A, B and C all emptied
// by one firing.  The Fibonacci graph relies on this: its initial tokens and
// constant inputs only balance if both data inputs are consumed each time.
// A control token is TRUE when it is non-zero (this design's encoding).
//
// Timing: the selected token is offered two cycles after the edge that
// captured the last of the three input tokens.
module df_dmerge
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t a,
  input  logic  stra,
  output logic  acka,
  input  data_t b,
  input  logic  strb,
  output logic  ackb,
  input  data_t c,
  input  logic  strc,
  output logic  ackc,
  output data_t z,
  output logic  strz,
  input  logic  ackz
);

  op_state_e state, state_n;
  data_t     qa, qb, qc;
  logic      bita, bitb, bitc, takenz;
  logic      arm, en, clr, load;

  assign arm  = (state == ST_S0) && start;
  assign en   = (state == ST_S1);
  assign clr  = (state == ST_S3);
  assign load = (state == ST_S2);

  df_in_reg  u_a (.clk, .rst_n, .arm, .en, .clr, .din(a), .str(stra), .ack(acka), .q(qa), .full(bita));
  df_in_reg  u_b (.clk, .rst_n, .arm, .en, .clr, .din(b), .str(strb), .ack(ackb), .q(qb), .full(bitb));
  df_in_reg  u_c (.clk, .rst_n, .arm, .en, .clr, .din(c), .str(strc), .ack(ackc), .q(qc), .full(bitc));
  df_out_reg u_z (.clk, .rst_n, .load, .d(is_true(qc) ? qa : qb), .ack(ackz), .z, .str(strz), .taken(takenz));

  always_comb begin
    state_n = state;
    case (state)
      ST_S0:      if (start) state_n = ST_S1;
      ST_S1:      if (bita && bitb && bitc) state_n = ST_S2;
      ST_S2:      state_n = ST_S2_WAIT;
      ST_S2_WAIT: if (takenz) state_n = ST_S3;
      ST_S3:      state_n = ST_S1;
      default:    state_n = ST_S0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= ST_S0;
    else        state <= state_n;
  end

endmodule
