// df_branch: controlled branch dataflow operator.  Inputs: data arc a and
// control arc c.  Outputs: arc t (taken when the control token is TRUE) and
// arc f (taken when it is FALSE).
//
// The operator waits for both a data token and a control token (S1), then
// loads the data token into the output register selected by the control
// token and raises its strobe (S2).  The other output stays silent.  When the
// token has been taken, S3 clears both inputs and the operator returns to S1.
// A control token is TRUE when it is non-zero (this design's encoding).
//
// Timing: the data token is offered two cycles after the edge that captured
// the last of the two input tokens.
module df_branch
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t a,
  input  logic  stra,
  output logic  acka,
  input  data_t c,
  input  logic  strc,
  output logic  ackc,
  output data_t t,
  output logic  strt,
  input  logic  ackt,
  output data_t f,
  output logic  strf,
  input  logic  ackf
);

  op_state_e state, state_n;
  data_t     qa, qc;
  logic      bita, bitc, takent, takenf;
  logic      arm, en, clr, load, sel_t;

  assign arm   = (state == ST_S0) && start;
  assign en    = (state == ST_S1);
  assign clr   = (state == ST_S3);
  assign load  = (state == ST_S2);
  assign sel_t = is_true(qc);

  df_in_reg  u_a (.clk, .rst_n, .arm, .en, .clr, .din(a), .str(stra), .ack(acka), .q(qa), .full(bita));
  df_in_reg  u_c (.clk, .rst_n, .arm, .en, .clr, .din(c), .str(strc), .ack(ackc), .q(qc), .full(bitc));
  df_out_reg u_t (.clk, .rst_n, .load(load && sel_t),  .d(qa), .ack(ackt), .z(t), .str(strt), .taken(takent));
  df_out_reg u_f (.clk, .rst_n, .load(load && !sel_t), .d(qa), .ack(ackf), .z(f), .str(strf), .taken(takenf));

  always_comb begin
    state_n = state;
    case (state)
      ST_S0:      if (start) state_n = ST_S1;
      ST_S1:      if (bita && bitc) state_n = ST_S2;
      ST_S2:      state_n = ST_S2_WAIT;
      ST_S2_WAIT: if (takent || takenf) state_n = ST_S3;
      ST_S3:      state_n = ST_S1;
      default:    state_n = ST_S0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= ST_S0;
    else        state <= state_n;
  end

endmodule
