// df_primitive: two-input, one-output primitive dataflow operator
// (ADD, SUB, MUL, DIV, AND, OR, NOT), selected by the parameter OP.
//
// Datapath: input registers dadoa/dadob with status bits bita/bitb
// (df_in_reg), the operation, and the output register dadoz with status bit
// bitz driving strz (df_out_reg).  The controller walks the ASM chart of the
// ADD operator: S0 waits for `start`; S1 takes tokens from a and b in any
// order, acknowledging each one; once both status bits are set the operator
// fires, S2 loads dadoz <= f(a, b) and raises strz; the result is held until
// the receiver takes it (ackz = 0 at a clock edge); S3 clears bita, bitb, acka
// and ackb and returns to S1.  Only one token is ever held per arc (static
// dataflow), so a new pair of operands is accepted only after the result has
// left.
//
// Timing: with an idle receiver, the result appears on z (strz = 1) two cycles
// after the clock edge that captured the second operand, and the input ports
// reopen (acka = ackb = 0) four cycles after that capture.  NOT uses the a
// operand only; like every operator of this architecture it still waits for
// and consumes a token on b.  Arithmetic wraps modulo 2^W; MUL keeps the low W
// bits; DIV is signed and returns all ones for a zero divisor.  These
// arithmetic details and the reset values are this design's choices.
module df_primitive
  import df_pkg::*;
#(
  parameter prim_op_e OP = OP_ADD
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  // input arc a
  input  data_t a,
  input  logic  stra,
  output logic  acka,
  // input arc b
  input  data_t b,
  input  logic  strb,
  output logic  ackb,
  // output arc z
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
  df_out_reg u_z (.clk, .rst_n, .load, .d(prim_eval(OP, qa, qb)), .ack(ackz), .z, .str(strz), .taken(takenz));

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
