// tb_df_decider: self-checking test of df_decider for the six relational
// operations IFgt, IFge, IFlt, IFle, IFeq and IFdf, one instance each.
//
// Every instance receives the same 300 operand pairs, drawn from a small
// signed range so that equal, greater and smaller pairs all occur, with random
// input gaps and output back-pressure.  Each output token must be 1 (TRUE) or
// 0 (FALSE) as computed here from the signed operands.
module tb_df_decider;
  import df_pkg::*;

  localparam int NTOK = 300;
  localparam int WATCHDOG = 200000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, done_cnt = 0;
  data_t va[NTOK], vb[NTOK];

  function automatic data_t ref_cmp(int op, data_t a, data_t b);
    int sa, sb;
    bit t;
    sa = int'($signed(a));
    sb = int'($signed(b));
    case (op)
      0: t = sa > sb;
      1: t = sa >= sb;
      2: t = sa < sb;
      3: t = sa <= sb;
      4: t = sa == sb;
      default: t = sa != sb;
    endcase
    return t ? 16'd1 : 16'd0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial
    for (int i = 0; i < NTOK; i++) begin
      va[i] = data_t'(int'($urandom_range(8)) - 4);
      vb[i] = data_t'(int'($urandom_range(8)) - 4);
    end

  for (genvar g = 0; g < 6; g++) begin : g_cmp
    data_t a, b, z;
    logic  stra, acka, strb, ackb, strz, ackz;
    df_decider #(.CMP(cmp_op_e'(g))) dut (.clk, .rst_n, .start,
      .a, .stra, .acka, .b, .strb, .ackb, .z, .strz, .ackz);
    tb_df_src  u_a (.clk, .rst_n, .data(a), .str(stra), .ack(acka));
    tb_df_src  u_b (.clk, .rst_n, .data(b), .str(strb), .ack(ackb));
    tb_df_sink u_z (.clk, .rst_n, .data(z), .str(strz), .ack(ackz));
    initial begin
      u_a.gap_pct = 40; u_b.gap_pct = 20;
      u_z.busy_pct = 30; u_z.hold_max = 2;
      @(posedge rst_n);
      for (int i = 0; i < NTOK; i++) begin
        u_a.push(va[i]);
        u_b.push(vb[i]);
      end
      wait (u_z.got.size() == NTOK);
      repeat (20) @(posedge clk);
      check(u_z.got.size() == NTOK, $sformatf("cmp %0d: %0d results", g, u_z.got.size()));
      for (int i = 0; i < NTOK; i++)
        check(u_z.got[i] == ref_cmp(g, va[i], vb[i]),
              $sformatf("cmp %0d token %0d: %0d ? %0d -> %0d", g, i,
                        $signed(va[i]), $signed(vb[i]), u_z.got[i]));
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done_cnt == 6);
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
