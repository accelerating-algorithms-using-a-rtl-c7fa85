// df_decider: two-input relational dataflow operator (IFgt, IFge, IFlt, IFle,
// IFeq, IFdf), selected by the parameter CMP.  The Fibonacci graph uses it as
// "gtdecider": z = (a > b) ? TRUE : FALSE.
//
// It has the architecture of the primitive operators: two input registers
// with status bits, one output register, and the S0..S3 controller (see
// df_primitive).  The operator fires when both operands are present and sends
// a control token: 1 for TRUE, 0 for FALSE.  The comparison is signed.  The
// token encoding and the signedness are this design's choices.  Because a
// decider only ever sends 1 or 0, bits 15:1 of z are constant 0 and
// synthesis removes their flip-flops; the port keeps the full bus width so
// that the decider plugs into any arc.
//
// Timing: as df_primitive, the result is offered two cycles after the edge
// that captured the second operand.
module df_decider
  import df_pkg::*;
#(
  parameter cmp_op_e CMP = IF_GT
) (
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
  logic      arm, en, clr, load;

  assign arm  = (state == ST_S0) && start;
  assign en   = (state == ST_S1);
  assign clr  = (state == ST_S3);
  assign load = (state == ST_S2);

  df_in_reg u_a (.clk, .rst_n, .arm, .en, .clr, .din(a), .str(stra), .ack(acka), .q(qa), .full(bita));
  df_in_reg u_b (.clk, .rst_n, .arm, .en, .clr, .din(b), .str(strb), .ack(ackb), .q(qb), .full(bitb));
  df_out_reg u_z (.clk, .rst_n, .load, .d(cmp_eval(CMP, qa, qb)), .ack(ackz), .z, .str(strz), .taken(takenz));

  always_comb begin
    state_n = state;
    case (state)
      ST_S0:      if (start) state_n = ST_S1;
      ST_S1:      if (bita && bitb) state_n = ST_S2;
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
