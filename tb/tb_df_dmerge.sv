// tb_df_dmerge: self-checking test of df_dmerge.
//
// 300 firings with random tokens on a (TRUE side), b (FALSE side) and control
// c (zero, one or another non-zero value), random input gaps and output
// back-pressure.  Output token i must be a[i] when c[i] is non-zero and b[i]
// when it is zero; every firing consumes one token from each of the three
// inputs, so the unselected token is discarded, not kept for later.
module tb_df_dmerge;
  import df_pkg::*;

  localparam int NTOK = 300;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  data_t va[NTOK], vb[NTOK], vc[NTOK];

  data_t a, b, c, z;
  logic  stra, acka, strb, ackb, strc, ackc, strz, ackz;
  df_dmerge dut (.clk, .rst_n, .start, .a, .stra, .acka, .b, .strb, .ackb,
                 .c, .strc, .ackc, .z, .strz, .ackz);
  tb_df_src  u_a (.clk, .rst_n, .data(a), .str(stra), .ack(acka));
  tb_df_src  u_b (.clk, .rst_n, .data(b), .str(strb), .ack(ackb));
  tb_df_src  u_c (.clk, .rst_n, .data(c), .str(strc), .ack(ackc));
  tb_df_sink u_z (.clk, .rst_n, .data(z), .str(strz), .ack(ackz));

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
      case ($urandom_range(2))
        0: vc[i] = 16'd0;
        1: vc[i] = 16'd1;
        default: vc[i] = data_t'($urandom_range(65535, 2));
      endcase
    end
    u_a.gap_pct = 30; u_b.gap_pct = 10; u_c.gap_pct = 50;
    u_z.busy_pct = 30; u_z.hold_max = 2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < NTOK; i++) begin
      u_a.push(va[i]);
      u_b.push(vb[i]);
      u_c.push(vc[i]);
    end
    wait (u_z.got.size() == NTOK);
    repeat (30) @(posedge clk);
    check(u_z.got.size() == NTOK, $sformatf("%0d outputs", u_z.got.size()));
    check(u_a.sent == NTOK && u_b.sent == NTOK && u_c.sent == NTOK,
          $sformatf("consumed a=%0d b=%0d c=%0d", u_a.sent, u_b.sent, u_c.sent));
    for (int i = 0; i < NTOK; i++)
      check(u_z.got[i] == (vc[i] != 0 ? va[i] : vb[i]),
            $sformatf("z[%0d]=%h (a=%h b=%h c=%h)", i, u_z.got[i], va[i], vb[i], vc[i]));
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
