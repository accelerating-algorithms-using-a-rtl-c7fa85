// tb_df_branch: self-checking test of df_branch.
//
// 300 random data tokens and 300 control tokens (zero, one or another
// non-zero value) are fed with random gaps; the t and f receivers apply
// random back-pressure.  Every data token must appear on t when its control
// token is non-zero and on f when it is zero, each output keeping the input
// order, and no token may appear on both.  Both inputs must be consumed once
// per firing.
module tb_df_branch;
  import df_pkg::*;

  localparam int NTOK = 300;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  data_t vd[NTOK], vc[NTOK];
  data_t exp_t[$], exp_f[$];

  data_t a, c, t, f;
  logic  stra, acka, strc, ackc, strt, ackt, strf, ackf;
  df_branch dut (.clk, .rst_n, .start, .a, .stra, .acka, .c, .strc, .ackc,
                 .t, .strt, .ackt, .f, .strf, .ackf);
  tb_df_src  u_a (.clk, .rst_n, .data(a), .str(stra), .ack(acka));
  tb_df_src  u_c (.clk, .rst_n, .data(c), .str(strc), .ack(ackc));
  tb_df_sink u_t (.clk, .rst_n, .data(t), .str(strt), .ack(ackt));
  tb_df_sink u_f (.clk, .rst_n, .data(f), .str(strf), .ack(ackf));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < NTOK; i++) begin
      vd[i] = data_t'($urandom);
      case ($urandom_range(2))
        0: vc[i] = 16'd0;
        1: vc[i] = 16'd1;
        default: vc[i] = data_t'($urandom_range(65535, 2));
      endcase
      if (vc[i] != 0) exp_t.push_back(vd[i]);
      else            exp_f.push_back(vd[i]);
    end
    u_a.gap_pct = 30; u_c.gap_pct = 50;
    u_t.busy_pct = 30; u_t.hold_max = 2;
    u_f.busy_pct = 50; u_f.hold_max = 3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < NTOK; i++) begin
      u_a.push(vd[i]);
      u_c.push(vc[i]);
    end
    wait (u_t.got.size() + u_f.got.size() == NTOK);
    repeat (30) @(posedge clk);
    check(u_t.got.size() == exp_t.size(), $sformatf("t count %0d expected %0d", u_t.got.size(), exp_t.size()));
    check(u_f.got.size() == exp_f.size(), $sformatf("f count %0d expected %0d", u_f.got.size(), exp_f.size()));
    check(u_a.sent == NTOK && u_c.sent == NTOK, "inputs consumed once per firing");
    for (int i = 0; i < exp_t.size() && i < u_t.got.size(); i++)
      check(u_t.got[i] == exp_t[i], $sformatf("t[%0d]=%h expected %h", i, u_t.got[i], exp_t[i]));
    for (int i = 0; i < exp_f.size() && i < u_f.got.size(); i++)
      check(u_f.got[i] == exp_f[i], $sformatf("f[%0d]=%h expected %h", i, u_f.got[i], exp_f[i]));
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
