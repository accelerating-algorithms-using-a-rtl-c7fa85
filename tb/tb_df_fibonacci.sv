// tb_df_fibonacci: end-to-end test of the Fibonacci dataflow graph.
//
// For each argument n the graph is reset, its input arcs are loaded with the
// initial tokens and constant sources described in df_fibonacci, and the
// tokens leaving on pf and fibo are collected until the graph goes quiet.
// Expected values come from a direct software run of the algorithm
// (first = 0, second = 1, loop i = 0..n: tmp = first + second, ...):
//   - pf carries exactly one token, the final loop index n;
//   - fibo carries the n + 1 values of tmp, in order, followed by one more
//     sum that the graph forms when the loop-control FALSE token releases the
//     constant dadoh: tmp(last) + dadoh.
// With an idle environment pf must leave 18 + 21 n cycles after start.
// Runs are repeated with random back-pressure on the outputs and random gaps
// on the inputs.  The test also counts the graph's mechanisms (stalls on
// internal arcs, TRUE and FALSE selections of the dmerges and the branch,
// both ndmerge inputs full at once) and fails if one never happened.
module tb_df_fibonacci;
  import df_pkg::*;

  localparam int N_MAX    = 22;          // F(24) = 46368 still fits 16 bits
  localparam int WATCHDOG = 400000;      // cycles
  localparam data_t H_VAL = 16'h0100;    // constant on dadoh

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  data_t d[10];
  logic  s[10], k[10];
  data_t pf, fibo;
  logic  str_pf, ack_pf, str_fibo, ack_fibo;

  df_fibonacci dut (
    .clk, .rst_n, .start,
    .dadoa(d[0]), .str_dadoa(s[0]), .ack_dadoa(k[0]),
    .dadob(d[1]), .str_dadob(s[1]), .ack_dadob(k[1]),
    .dadoc(d[2]), .str_dadoc(s[2]), .ack_dadoc(k[2]),
    .dadod(d[3]), .str_dadod(s[3]), .ack_dadod(k[3]),
    .dadoe(d[4]), .str_dadoe(s[4]), .ack_dadoe(k[4]),
    .dadof(d[5]), .str_dadof(s[5]), .ack_dadof(k[5]),
    .dadog(d[6]), .str_dadog(s[6]), .ack_dadog(k[6]),
    .dadoh(d[7]), .str_dadoh(s[7]), .ack_dadoh(k[7]),
    .dadoi(d[8]), .str_dadoi(s[8]), .ack_dadoi(k[8]),
    .dadoj(d[9]), .str_dadoj(s[9]), .ack_dadoj(k[9]),
    .pf, .str_pf, .ack_pf,
    .fibo, .str_fibo, .ack_fibo
  );

  tb_df_src u_a (.clk, .rst_n, .data(d[0]), .str(s[0]), .ack(k[0]));
  tb_df_src u_b (.clk, .rst_n, .data(d[1]), .str(s[1]), .ack(k[1]));
  tb_df_src u_c (.clk, .rst_n, .data(d[2]), .str(s[2]), .ack(k[2]));
  tb_df_src u_d (.clk, .rst_n, .data(d[3]), .str(s[3]), .ack(k[3]));
  tb_df_src u_e (.clk, .rst_n, .data(d[4]), .str(s[4]), .ack(k[4]));
  tb_df_src u_f (.clk, .rst_n, .data(d[5]), .str(s[5]), .ack(k[5]));
  tb_df_src u_g (.clk, .rst_n, .data(d[6]), .str(s[6]), .ack(k[6]));
  tb_df_src u_h (.clk, .rst_n, .data(d[7]), .str(s[7]), .ack(k[7]));
  tb_df_src u_i (.clk, .rst_n, .data(d[8]), .str(s[8]), .ack(k[8]));
  tb_df_src u_j (.clk, .rst_n, .data(d[9]), .str(s[9]), .ack(k[9]));
  tb_df_sink u_pf   (.clk, .rst_n, .data(pf),   .str(str_pf),   .ack(ack_pf));
  tb_df_sink u_fibo (.clk, .rst_n, .data(fibo), .str(str_fibo), .ack(ack_fibo));

  // ---- mechanism counters -------------------------------------------------
  int n_stall = 0, n_dm_true = 0, n_dm_false = 0, n_br_t = 0, n_br_f = 0;
  int n_nd_both = 0, n_activity = 0;
  always @(posedge clk) if (rst_n) begin
    if ((dut.s3.str && dut.s3.ack) || (dut.s15.str && dut.s15.ack) ||
        (dut.s24.str && dut.s24.ack) || (dut.s12.str && dut.s12.ack) ||
        (dut.s16.str && dut.s16.ack) || (dut.s18.str && dut.s18.ack) ||
        (dut.str_fibo && dut.ack_fibo) || (dut.str_pf && dut.ack_pf)) n_stall++;
    if (dut.u_op02.state == ST_S2 ||  dut.u_op15.state == ST_S2) begin
      if (dut.u_op02.state == ST_S2) begin
        if (is_true(dut.u_op02.qc)) n_dm_true++; else n_dm_false++;
      end
      if (dut.u_op15.state == ST_S2) begin
        if (is_true(dut.u_op15.qc)) n_dm_true++; else n_dm_false++;
      end
    end
    if (dut.str_pf && !dut.ack_pf) n_br_f++;
    if (dut.s10.str && !dut.s10.ack) n_br_t++;
    if ((dut.u_op03.bita && dut.u_op03.bitb) || (dut.u_op10.bita && dut.u_op10.bitb) ||
        (dut.u_op11.bita && dut.u_op11.bitb) || (dut.u_op12.bita && dut.u_op12.bitb) ||
        (dut.u_op13.bita && dut.u_op13.bitb)) n_nd_both++;
  end

  // activity detector: any strobe on an external arc
  always @(posedge clk) if (rst_n && (str_fibo || str_pf)) n_activity++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_case(input int n, input int busy, input int gap, input bit late_j);
    data_t first, second, tmp;
    data_t exp_fibo[$];
    int    last_act, quiet, cyc, pf_cyc;
    // reference: Algorithm 1
    first = 0; second = 1;
    for (int i = 0; i <= n; i++) begin
      tmp = first + second; first = second; second = tmp;
      exp_fibo.push_back(tmp);
    end
    exp_fibo.push_back(tmp + H_VAL);

    rst_n = 0; start = 0;
    u_a.q.delete(); u_b.q.delete(); u_c.q.delete(); u_d.q.delete(); u_e.q.delete();
    u_f.q.delete(); u_g.q.delete(); u_h.q.delete(); u_i.q.delete(); u_j.q.delete();
    u_pf.got.delete(); u_fibo.got.delete();
    u_a.constant_en = 1; u_a.constant_val = data_t'(n);
    u_c.constant_en = 1; u_c.constant_val = 0;
    u_e.constant_en = 1; u_e.constant_val = 1;
    u_h.constant_en = 1; u_h.constant_val = H_VAL;
    u_b.push(TOKEN_FALSE);
    u_d.push(16'h7777);
    u_f.push(0);
    u_g.push(1);
    u_i.push(1);
    u_a.gap_pct = gap; u_b.gap_pct = gap; u_c.gap_pct = gap; u_d.gap_pct = gap;
    u_e.gap_pct = gap; u_f.gap_pct = gap; u_g.gap_pct = gap; u_h.gap_pct = gap;
    u_i.gap_pct = gap;
    u_pf.busy_pct = busy; u_fibo.busy_pct = busy;
    u_pf.hold_max = busy / 20; u_fibo.hold_max = busy / 20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start = 1;
    @(posedge clk);
    start = 0;
    // The optional dadoj token enters the FALSE side of dmerge u_op16, which
    // is never selected while the sums are non-zero.  Sent late, it meets
    // the fed-back copy in ndmerge u_op13, which then holds two tokens.
    if (late_j) begin
      @(posedge clk iff dut.u_op13.bitb);
      u_j.push(16'h5555);
    end
    // wait until the outputs have been quiet for a while
    last_act = n_activity; quiet = 0; cyc = 0; pf_cyc = 0;
    while (quiet < 300) begin
      @(posedge clk);
      cyc++;
      if (pf_cyc == 0 && str_pf) pf_cyc = cyc;
      if (n_activity != last_act) begin quiet = 0; last_act = n_activity; end
      else quiet++;
    end
    $display("n=%0d busy=%0d gap=%0d: pf after %0d cycles", n, busy, gap, pf_cyc);
    // With an idle environment the index loop takes 21 cycles per iteration
    // (this design's operator timing: 5 cycles per firing, about 4 operators
    // in the loop's critical cycle), and pf leaves 18 + 21 n cycles after start.
    if (busy == 0 && gap == 0 && !late_j)
      check(pf_cyc == 18 + 21 * n, $sformatf("n=%0d: pf after %0d cycles, expected %0d", n, pf_cyc, 18 + 21 * n));
    check(u_pf.got.size() == 1, $sformatf("n=%0d: pf tokens %0d, expected 1", n, u_pf.got.size()));
    if (u_pf.got.size() >= 1)
      check(u_pf.got[0] == data_t'(n), $sformatf("n=%0d: pf=%0d", n, u_pf.got[0]));
    check(u_fibo.got.size() == exp_fibo.size(),
          $sformatf("n=%0d: fibo tokens %0d, expected %0d", n, u_fibo.got.size(), exp_fibo.size()));
    for (int x = 0; x < exp_fibo.size() && x < u_fibo.got.size(); x++)
      check(u_fibo.got[x] == exp_fibo[x],
            $sformatf("n=%0d: fibo[%0d]=%0d expected %0d", n, x, u_fibo.got[x], exp_fibo[x]));
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= 6; n++) run_case(n, 0, 0, 0);
    run_case(N_MAX, 0, 0, 0);
    run_case(8, 0, 0, 1);
    for (int r = 0; r < 6; r++) run_case(1 + $urandom_range(N_MAX - 1), 40, 30, r[0]);
    $display("mechanisms: stalls=%0d dmerge_true=%0d dmerge_false=%0d branch_t=%0d branch_f=%0d ndmerge_both=%0d",
             n_stall, n_dm_true, n_dm_false, n_br_t, n_br_f, n_nd_both);
    check(n_stall > 0,    "no back-pressure stall happened");
    check(n_dm_true > 0,  "no dmerge TRUE selection happened");
    check(n_dm_false > 0, "no dmerge FALSE selection happened");
    check(n_br_t > 0,     "branch never sent on t");
    check(n_br_f > 0,     "branch never sent on f");
    check(n_nd_both > 0,  "ndmerge never held tokens on both inputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
