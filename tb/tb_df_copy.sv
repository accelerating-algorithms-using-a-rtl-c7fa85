// tb_df_copy: self-checking test of df_copy.
//
// 300 random tokens go in on a; both outputs must deliver all of them, in
// order, although the two receivers apply different random back-pressure, so
// the copies are taken in different cycles.  A second phase, with idle
// receivers, checks that the copies are offered two cycles after the edge
// that captured the input, and that no new token is taken while a copy is
// still waiting (static dataflow: one token per arc).
module tb_df_copy;
  import df_pkg::*;

  localparam int NTOK = 300;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  data_t v[NTOK];

  data_t a, z1, z2;
  logic  stra, acka, strz1, ackz1, strz2, ackz2;
  df_copy dut (.clk, .rst_n, .start, .a, .stra, .acka,
               .z1, .strz1, .ackz1, .z2, .strz2, .ackz2);
  tb_df_src  u_a  (.clk, .rst_n, .data(a), .str(stra), .ack(acka));
  tb_df_sink u_z1 (.clk, .rst_n, .data(z1), .str(strz1), .ack(ackz1));
  tb_df_sink u_z2 (.clk, .rst_n, .data(z2), .str(strz2), .ack(ackz2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int lat;
    for (int i = 0; i < NTOK; i++) v[i] = data_t'($urandom);
    u_a.gap_pct = 30;
    u_z1.busy_pct = 20; u_z1.hold_max = 1;
    u_z2.busy_pct = 60; u_z2.hold_max = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < NTOK; i++) u_a.push(v[i]);
    wait (u_z1.got.size() == NTOK && u_z2.got.size() == NTOK);
    repeat (20) @(posedge clk);
    check(u_z1.got.size() == NTOK && u_z2.got.size() == NTOK, "token count");
    for (int i = 0; i < NTOK; i++) begin
      check(u_z1.got[i] == v[i], $sformatf("z1[%0d]=%h expected %h", i, u_z1.got[i], v[i]));
      check(u_z2.got[i] == v[i], $sformatf("z2[%0d]=%h expected %h", i, u_z2.got[i], v[i]));
    end
    check(u_z2.stalls > 0, "z2 never stalled");

    // timing phase
    u_a.gap_pct = 0;
    u_z1.busy_pct = 0; u_z1.hold_max = 0;
    u_z2.busy_pct = 0; u_z2.hold_max = 0;
    repeat (10) @(posedge clk);
    u_a.push(16'hBEEF);
    @(posedge clk iff (stra && !acka));   // capture edge
    #1 lat = 0;
    while (!strz1) begin @(posedge clk); #1 lat++; end
    check(lat == 2, $sformatf("copy latency %0d, expected 2", lat));
    check(strz2 && z1 == 16'hBEEF && z2 == 16'hBEEF, "both copies offered together");
    // hold z2 busy: the copy must not take a new token
    force ackz2 = 1'b1;
    u_a.push(16'h1111);
    repeat (10) @(posedge clk);
    check(acka && strz2, "input stays closed while a copy is pending");
    release ackz2;
    wait (u_z2.got.size() == NTOK + 2);
    repeat (5) @(posedge clk);
    check(u_z1.got[NTOK + 1] == 16'h1111 && u_z2.got[NTOK + 1] == 16'h1111, "token after the stall");
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
