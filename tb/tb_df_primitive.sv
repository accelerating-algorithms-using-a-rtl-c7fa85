// tb_df_primitive: self-checking test of df_primitive for all seven
// operations (ADD, SUB, MUL, DIV, AND, OR, NOT), one instance per operation.
//
// Each instance gets the same 200 random operand pairs (plus corner values:
// zero divisor, negative operands, wrap-around) from two token sources, with
// random gaps on the inputs and random back-pressure on the output.  The
// results are compared, in order, with values computed here in the testbench.
// A separate ADD instance with idle neighbours checks the timing: the result
// is offered two cycles after the edge that captured the second operand, and
// the inputs reopen four cycles after that edge.
module tb_df_primitive;
  import df_pkg::*;

  localparam int NTOK = 200;
  localparam int WATCHDOG = 200000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int done_cnt = 0;

  data_t va[NTOK], vb[NTOK];

  function automatic data_t ref_op(int op, data_t a, data_t b);
    int sa, sb;
    sa = int'($signed(a));
    sb = int'($signed(b));
    case (op)
      0: return data_t'((int'(a) + int'(b)) % 65536);
      1: return data_t'((int'(a) - int'(b) + 65536) % 65536);
      2: return data_t'((longint'(a) * longint'(b)) % 65536);
      3: return (b == 0) ? 16'hFFFF : data_t'(sa / sb);
      4: return a & b;
      5: return a | b;
      default: return 16'hFFFF - a;
    endcase
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < NTOK; i++) begin
      va[i] = data_t'($urandom);
      vb[i] = data_t'($urandom);
    end
    va[0] = 16'd7;     vb[0] = 16'd0;       // divide by zero
    va[1] = 16'hFFF0;  vb[1] = 16'd3;       // -16 / 3
    va[2] = 16'hFFFF;  vb[2] = 16'd1;       // add wraps
    va[3] = 16'd300;   vb[3] = 16'd300;     // mul wraps
    va[4] = 16'd5;     vb[4] = 16'hFFFE;    // 5 / -2
  end

  for (genvar g = 0; g < 7; g++) begin : g_op
    data_t a, b, z;
    logic  stra, acka, strb, ackb, strz, ackz;
    df_primitive #(.OP(prim_op_e'(g))) dut (.clk, .rst_n, .start,
      .a, .stra, .acka, .b, .strb, .ackb, .z, .strz, .ackz);
    tb_df_src  u_a (.clk, .rst_n, .data(a), .str(stra), .ack(acka));
    tb_df_src  u_b (.clk, .rst_n, .data(b), .str(strb), .ack(ackb));
    tb_df_sink u_z (.clk, .rst_n, .data(z), .str(strz), .ack(ackz));
    initial begin
      u_a.gap_pct = 30; u_b.gap_pct = 50;
      u_z.busy_pct = 30; u_z.hold_max = 3;
      @(posedge rst_n);
      for (int i = 0; i < NTOK; i++) begin
        u_a.push(va[i]);
        u_b.push(vb[i]);
      end
      wait (u_z.got.size() == NTOK);
      repeat (20) @(posedge clk);
      check(u_z.got.size() == NTOK, $sformatf("op %0d: %0d results", g, u_z.got.size()));
      for (int i = 0; i < NTOK; i++)
        check(u_z.got[i] == ref_op(g, va[i], vb[i]),
              $sformatf("op %0d token %0d: %h,%h -> %h, expected %h", g, i, va[i], vb[i],
                        u_z.got[i], ref_op(g, va[i], vb[i])));
      done_cnt++;
    end
  end

  // ---- timing instance: ADD, inputs driven directly, output always ready ----
  data_t ta, tbv, tz;
  logic  tstra, tacka, tstrb, tackb, tstrz;
  df_primitive #(.OP(OP_ADD)) dut_t (.clk, .rst_n, .start,
    .a(ta), .stra(tstra), .acka(tacka), .b(tbv), .strb(tstrb), .ackb(tackb),
    .z(tz), .strz(tstrz), .ackz(1'b0));

  initial begin
    int lat_z, lat_open;
    tstra = 0; tstrb = 0; ta = 0; tbv = 0;
    @(posedge rst_n);
    check(tacka && tackb, "ports must be busy before start");
    @(posedge clk);
    // acknowledge reads 0 only after start
    @(negedge clk);
    repeat (2) @(negedge clk);
    // operand a first, operand b two cycles later
    ta = 16'd1234; tstra = 1;
    @(negedge clk);
    check(tacka, "acka set after a was taken");
    tstra = 0;
    @(negedge clk);
    check(!tstrz, "no result with one operand");
    tbv = 16'd4321; tstrb = 1;
    @(posedge clk);            // edge that captures b
    #1 tstrb = 0;
    lat_z = 0; lat_open = 0;
    while (!tstrz) begin @(posedge clk); #1 lat_z++; end
    check(lat_z == 2, $sformatf("result latency %0d cycles, expected 2", lat_z));
    check(tz == 16'd5555, $sformatf("timing add %0d", tz));
    lat_open = lat_z;
    while (tacka || tackb) begin @(posedge clk); #1 lat_open++; end
    check(lat_open == 4, $sformatf("inputs reopen after %0d cycles, expected 4", lat_open));
    done_cnt++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done_cnt == 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
