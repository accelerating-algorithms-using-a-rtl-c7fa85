// df_pkg: types and constants shared by the static dataflow operators.
//
// Every operator in this library is a small clocked process with one 16-bit
// register per input arc and one per output arc.  Tokens move between
// operators over a parallel data bus plus two control wires per arc: a strobe
// (str, driven by the sender, 1 = a token is on the bus) and an acknowledge
// (ack, driven by the receiver, 0 = ready to take a token, 1 = busy).
//
// The operator controller follows the four states S0..S3 of the operator's ASM
// chart: S0 waits for the global start, S1 collects input tokens, S2 computes
// and offers the result, S3 clears the operator for the next firing.  The
// extra state S2_WAIT holds the result until the receiver has taken it (the
// "ackz = 1" loop under S2 in the chart).
//
// The bus width (16 bits) and the operator set follow the paper.  The encoding
// of TRUE/FALSE tokens (any non-zero value is TRUE, deciders emit 1 or 0) and
// the signed interpretation of comparisons and division are choices of this
// design.
package df_pkg;

  parameter int unsigned DATA_W = 16;

  typedef logic [DATA_W-1:0] data_t;

  // Operator controller states.
  typedef enum logic [2:0] {
    ST_S0      = 3'd0,  // initial state, waiting for start
    ST_S1      = 3'd1,  // receiving input tokens
    ST_S2      = 3'd2,  // computing, result register loaded
    ST_S2_WAIT = 3'd3,  // result offered (str = 1) until accepted
    ST_S3      = 3'd4   // clearing status bits before the next firing
  } op_state_e;

  // Two-input primitive operations (arithmetic and logic).
  typedef enum logic [2:0] {
    OP_ADD = 3'd0,
    OP_SUB = 3'd1,
    OP_MUL = 3'd2,
    OP_DIV = 3'd3,
    OP_AND = 3'd4,
    OP_OR  = 3'd5,
    OP_NOT = 3'd6
  } prim_op_e;

  // Relational deciders (IFgt, IFge, IFlt, IFle, IFeq, IFdf).
  typedef enum logic [2:0] {
    IF_GT = 3'd0,
    IF_GE = 3'd1,
    IF_LT = 3'd2,
    IF_LE = 3'd3,
    IF_EQ = 3'd4,
    IF_DF = 3'd5
  } cmp_op_e;

  localparam data_t TOKEN_TRUE  = data_t'(1);
  localparam data_t TOKEN_FALSE = data_t'(0);

  // A control token counts as TRUE when it is non-zero.
  function automatic logic is_true(input data_t v);
    return v != '0;
  endfunction

  // Result of a primitive operation.  Division by zero returns all ones.
  function automatic data_t prim_eval(input prim_op_e op, input data_t a, input data_t b);
    data_t r;
    case (op)
      OP_ADD:  r = a + b;
      OP_SUB:  r = a - b;
      OP_MUL:  r = data_t'(a * b);
      OP_DIV:  r = (b == '0) ? '1 : data_t'($signed(a) / $signed(b));
      OP_AND:  r = a & b;
      OP_OR:   r = a | b;
      OP_NOT:  r = ~a;
      default: r = '0;
    endcase
    return r;
  endfunction

  // Result of a relational decider: TRUE (1) or FALSE (0), signed compare.
  function automatic data_t cmp_eval(input cmp_op_e op, input data_t a, input data_t b);
    logic t;
    case (op)
      IF_GT:   t = $signed(a) >  $signed(b);
      IF_GE:   t = $signed(a) >= $signed(b);
      IF_LT:   t = $signed(a) <  $signed(b);
      IF_LE:   t = $signed(a) <= $signed(b);
      IF_EQ:   t = a == b;
      IF_DF:   t = a != b;
      default: t = 1'b0;
    endcase
    return t ? TOKEN_TRUE : TOKEN_FALSE;
  endfunction

endpackage
