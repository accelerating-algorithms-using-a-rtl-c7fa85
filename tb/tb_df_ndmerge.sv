// tb_df_ndmerge: self-checking test of df_ndmerge.
//
// Two sources send 200 tagged tokens each (bit 15 = source, low bits = a
// sequence number) with random gaps; the receiver applies random
// back-pressure.  The output must carry all 400 tokens exactly once, and the
// tokens of each source must keep their order.  The test also requires that
// both input registers were full at the same time at least once, and that
// in those cases the two sources were served alternately.  A directed phase
// checks that a lone token is forwarded two cycles after its capture.
module tb_df_ndmerge;
  import df_pkg::*;

  localparam int NTOK = 200;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int both_full = 0;

  data_t a, b, z;
  logic  stra, acka, strb, ackb, strz, ackz;
  df_ndmerge dut (.clk, .rst_n, .start, .a, .stra, .acka, .b, .strb, .ackb, .z, .strz, .ackz);
  tb_df_src  u_a (.clk, .rst_n, .data(a), .str(stra), .ack(acka));
  tb_df_src  u_b (.clk, .rst_n, .data(b), .str(strb), .ack(ackb));
  tb_df_sink u_z (.clk, .rst_n, .data(z), .str(strz), .ack(ackz));

  // both sources waiting on the operator, seen from its acknowledges
  always @(posedge clk) if (rst_n && start == 0 && acka && ackb && stra && strb) both_full++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int na, nb, lat;
    u_a.gap_pct = 40; u_b.gap_pct = 40;
    u_z.busy_pct = 40; u_z.hold_max = 3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < NTOK; i++) begin
      u_a.push(data_t'(i));
      u_b.push(data_t'(16'h8000 | i));
    end
    wait (u_z.got.size() == 2 * NTOK);
    repeat (30) @(posedge clk);
    check(u_z.got.size() == 2 * NTOK, $sformatf("%0d outputs", u_z.got.size()));
    na = 0; nb = 0;
    foreach (u_z.got[i]) begin
      if (u_z.got[i][15]) begin
        check(u_z.got[i][14:0] == 15'(nb), $sformatf("b order: got %0d expected %0d", u_z.got[i][14:0], nb));
        nb++;
      end else begin
        check(u_z.got[i][14:0] == 15'(na), $sformatf("a order: got %0d expected %0d", u_z.got[i][14:0], na));
        na++;
      end
    end
    check(na == NTOK && nb == NTOK, $sformatf("a=%0d b=%0d tokens", na, nb));
    check(both_full > 0, "both inputs never waited together");

    // both sources saturated, receiver always ready: service must alternate
    u_z.got.delete();
    u_a.gap_pct = 0; u_b.gap_pct = 0; u_z.busy_pct = 0; u_z.hold_max = 0;
    for (int i = 0; i < 10; i++) begin
      u_a.push(data_t'(i));
      u_b.push(data_t'(16'h8000 | i));
    end
    wait (u_z.got.size() == 20);
    for (int i = 1; i < 20; i++)
      check(u_z.got[i][15] != u_z.got[i-1][15], $sformatf("no alternation at %0d", i));

    // latency of a lone token
    repeat (10) @(posedge clk);
    u_b.push(16'h8123);
    @(posedge clk iff (strb && !ackb));
    #1 lat = 0;
    while (!strz) begin @(posedge clk); #1 lat++; end
    check(lat == 2 && z == 16'h8123, $sformatf("lone token latency %0d, z=%h", lat, z));
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
