// df_ndmerge: non-deterministic merge dataflow operator.  Inputs: arcs a and
// b.  Output: arc z.
//
// The first token to arrive on either input is forwarded to z; only that
// token is consumed.  The operator has the two-input architecture of the
// primitive operators, but its two input registers stay open in every state
// after start, so a token on the other arc is captured (and acknowledged)
// while the first one is being sent, and is forwarded in the next firing.
// When both registers hold a token, the one from the arc not served last goes
// first, so neither arc can starve the other (this tie rule is this design's
// choice).  S3 clears only the status bit of the token just sent.
//
// Timing: a token is offered two cycles after the edge that captured it,
// when the operator is idle.
module df_ndmerge
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
  output data_t z,
  output logic  strz,
  input  logic  ackz
);

  op_state_e state, state_n;
  data_t     qa, qb;
  logic      bita, bitb, takenz;
  logic      arm, en, load;
  logic      sel_b;       // port being served in this firing
  logic      last_b;      // port served in the previous firing

  assign arm  = (state == ST_S0) && start;
  assign en   = (state != ST_S0);
  assign load = (state == ST_S2);

  df_in_reg  u_a (.clk, .rst_n, .arm, .en, .clr((state == ST_S3) && !sel_b), .din(a), .str(stra), .ack(acka), .q(qa), .full(bita));
  df_in_reg  u_b (.clk, .rst_n, .arm, .en, .clr((state == ST_S3) &&  sel_b), .din(b), .str(strb), .ack(ackb), .q(qb), .full(bitb));
  df_out_reg u_z (.clk, .rst_n, .load, .d(sel_b ? qb : qa), .ack(ackz), .z, .str(strz), .taken(takenz));

  always_comb begin
    state_n = state;
    case (state)
      ST_S0:      if (start) state_n = ST_S1;
      ST_S1:      if (bita || bitb) state_n = ST_S2;
      ST_S2:      state_n = ST_S2_WAIT;
      ST_S2_WAIT: if (takenz) state_n = ST_S3;
      ST_S3:      state_n = ST_S1;
      default:    state_n = ST_S0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= ST_S0;
      sel_b  <= 1'b0;
      last_b <= 1'b1;
    end else begin
      state <= state_n;
      if (state == ST_S1 && (bita || bitb))
        sel_b <= bitb && (!bita || !last_b);
      if (state == ST_S3)
        last_b <= sel_b;
    end
  end

endmodule
