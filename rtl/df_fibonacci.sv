// df_fibonacci: the Fibonacci benchmark as a static dataflow graph.
//
// The graph has 20 operators joined by 26 internal arcs s1..s26, one
// instance per line of the graph's assembler listing; each instance below
// carries that line as a comment ("operator inputs...,outputs...").  Every
// arc is a df_chan_if: a 16-bit data bus with a strobe and an acknowledge.
//
// Left half (loop control, index i): dmerge u_op02 selects the initial index
// (dadoc) when its control token is FALSE and the incremented index (s2) when
// it is TRUE; the gtdecider u_op04 compares n (dadoa) with i; the branch u_op07
// sends i back through the increment u_op09 (i + dadoe) while n > i, and out
// on pf when the loop ends.  The decision token is copied to the dmerge of the
// index (via s7/s1) and, through s12, to the right half.
//
// Right half (the sequence): u_op18 adds the previous sum (s13) and the sum
// before it (s14).  Each sum leaves on fibo and is fed back on s17; a second
// copy goes round through dmerges u_op15/u_op16, which release the delayed
// operand only while the loop-control token on s12 is TRUE, so the number of
// sums is set by n.
//
// External arcs.  Inputs dadoa..dadoj carry data into the graph; each has a
// strobe str_<name> (driven by the environment) and an acknowledge
// ack_<name> (driven by the graph).  Outputs pf and fibo carry tokens out,
// with strobe str_<name> from the graph and acknowledge ack_<name> from the
// environment.  For one run with argument n the environment supplies, as in
// the paper, n on dadoa, and initial tokens: dadob = FALSE (first loop
// control), dadoc = 0 (first index, offered as a constant source because the
// dmerge consumes it at every firing), dadod = any (the token the dmerge
// discards on the first firing), dadoe = 1 (increment, constant source),
// dadof = 0 and dadog = 1 (first and second), dadoh = any (constant source
// for the FALSE side of u_op15), dadoi = 1 (the operand that follows dadog).
// dadoj is optional.  Operators leave reset in state S0 and start together on
// the `start` input.
//
// The wiring follows the paper's listing exactly.  The meaning given to each
// dado input above is derived from the graph; the paper only states that
// dadoa carries n and that fibo carries the result.
module df_fibonacci
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t dadoa, input  logic str_dadoa, output logic ack_dadoa,
  input  data_t dadob, input  logic str_dadob, output logic ack_dadob,
  input  data_t dadoc, input  logic str_dadoc, output logic ack_dadoc,
  input  data_t dadod, input  logic str_dadod, output logic ack_dadod,
  input  data_t dadoe, input  logic str_dadoe, output logic ack_dadoe,
  input  data_t dadof, input  logic str_dadof, output logic ack_dadof,
  input  data_t dadog, input  logic str_dadog, output logic ack_dadog,
  input  data_t dadoh, input  logic str_dadoh, output logic ack_dadoh,
  input  data_t dadoi, input  logic str_dadoi, output logic ack_dadoi,
  input  data_t dadoj, input  logic str_dadoj, output logic ack_dadoj,
  output data_t pf,     output logic str_pf,     input  logic ack_pf,
  output data_t fibo,   output logic str_fibo,   input  logic ack_fibo
);

  // internal arcs s1..s26
  df_chan_if s1 (.clk, .rst_n);
  df_chan_if s2 (.clk, .rst_n);
  df_chan_if s3 (.clk, .rst_n);
  df_chan_if s4 (.clk, .rst_n);
  df_chan_if s5 (.clk, .rst_n);
  df_chan_if s6 (.clk, .rst_n);
  df_chan_if s7 (.clk, .rst_n);
  df_chan_if s8 (.clk, .rst_n);
  df_chan_if s9 (.clk, .rst_n);
  df_chan_if s10 (.clk, .rst_n);
  df_chan_if s11 (.clk, .rst_n);
  df_chan_if s12 (.clk, .rst_n);
  df_chan_if s13 (.clk, .rst_n);
  df_chan_if s14 (.clk, .rst_n);
  df_chan_if s15 (.clk, .rst_n);
  df_chan_if s16 (.clk, .rst_n);
  df_chan_if s17 (.clk, .rst_n);
  df_chan_if s18 (.clk, .rst_n);
  df_chan_if s19 (.clk, .rst_n);
  df_chan_if s20 (.clk, .rst_n);
  df_chan_if s21 (.clk, .rst_n);
  df_chan_if s22 (.clk, .rst_n);
  df_chan_if s23 (.clk, .rst_n);
  df_chan_if s24 (.clk, .rst_n);
  df_chan_if s25 (.clk, .rst_n);
  df_chan_if s26 (.clk, .rst_n);

  // 1. ndmerge s7,dadob,s1;
  df_ndmerge u_op01 (
    .clk, .rst_n, .start,
    .a(s7.data), .stra(s7.str), .acka(s7.ack),
    .b(dadob), .strb(str_dadob), .ackb(ack_dadob),
    .z(s1.data), .strz(s1.str), .ackz(s1.ack)
  );

  // 2. dmerge s2,dadoc,s1,s3;
  df_dmerge u_op02 (
    .clk, .rst_n, .start,
    .a(s2.data), .stra(s2.str), .acka(s2.ack),
    .b(dadoc), .strb(str_dadoc), .ackb(ack_dadoc),
    .c(s1.data), .strc(s1.str), .ackc(s1.ack),
    .z(s3.data), .strz(s3.str), .ackz(s3.ack)
  );

  // 3. ndmerge dadod,s11,s2;
  df_ndmerge u_op03 (
    .clk, .rst_n, .start,
    .a(dadod), .stra(str_dadod), .acka(ack_dadod),
    .b(s11.data), .strb(s11.str), .ackb(s11.ack),
    .z(s2.data), .strz(s2.str), .ackz(s2.ack)
  );

  // 4. gtdecider dadoa,s4,s5;
  df_decider #(.CMP(IF_GT)) u_op04 (
    .clk, .rst_n, .start,
    .a(dadoa), .stra(str_dadoa), .acka(ack_dadoa),
    .b(s4.data), .strb(s4.str), .ackb(s4.ack),
    .z(s5.data), .strz(s5.str), .ackz(s5.ack)
  );

  // 5. copy s3,s4,s9;
  df_copy u_op05 (
    .clk, .rst_n, .start,
    .a(s3.data), .stra(s3.str), .acka(s3.ack),
    .z1(s4.data), .strz1(s4.str), .ackz1(s4.ack),
    .z2(s9.data), .strz2(s9.str), .ackz2(s9.ack)
  );

  // 6. copy s5,s6,s8;
  df_copy u_op06 (
    .clk, .rst_n, .start,
    .a(s5.data), .stra(s5.str), .acka(s5.ack),
    .z1(s6.data), .strz1(s6.str), .ackz1(s6.ack),
    .z2(s8.data), .strz2(s8.str), .ackz2(s8.ack)
  );

  // 7. branch s9,s8,s10,pf;
  df_branch u_op07 (
    .clk, .rst_n, .start,
    .a(s9.data), .stra(s9.str), .acka(s9.ack),
    .c(s8.data), .strc(s8.str), .ackc(s8.ack),
    .t(s10.data), .strt(s10.str), .ackt(s10.ack),
    .f(pf), .strf(str_pf), .ackf(ack_pf)
  );

  // 8. copy s6,s7,s12;
  df_copy u_op08 (
    .clk, .rst_n, .start,
    .a(s6.data), .stra(s6.str), .acka(s6.ack),
    .z1(s7.data), .strz1(s7.str), .ackz1(s7.ack),
    .z2(s12.data), .strz2(s12.str), .ackz2(s12.ack)
  );

  // 9. add s10,dadoe,s11;
  df_primitive #(.OP(OP_ADD)) u_op09 (
    .clk, .rst_n, .start,
    .a(s10.data), .stra(s10.str), .acka(s10.ack),
    .b(dadoe), .strb(str_dadoe), .ackb(ack_dadoe),
    .z(s11.data), .strz(s11.str), .ackz(s11.ack)
  );

  // 10. ndmerge s17,dadof,s13;
  df_ndmerge u_op10 (
    .clk, .rst_n, .start,
    .a(s17.data), .stra(s17.str), .acka(s17.ack),
    .b(dadof), .strb(str_dadof), .ackb(ack_dadof),
    .z(s13.data), .strz(s13.str), .ackz(s13.ack)
  );

  // 11. ndmerge dadog,s25,s14;
  df_ndmerge u_op11 (
    .clk, .rst_n, .start,
    .a(dadog), .stra(str_dadog), .acka(ack_dadog),
    .b(s25.data), .strb(s25.str), .ackb(s25.ack),
    .z(s14.data), .strz(s14.str), .ackz(s14.ack)
  );

  // 12. ndmerge dadoi,s22,s23;
  df_ndmerge u_op12 (
    .clk, .rst_n, .start,
    .a(dadoi), .stra(str_dadoi), .acka(ack_dadoi),
    .b(s22.data), .strb(s22.str), .ackb(s22.ack),
    .z(s23.data), .strz(s23.str), .ackz(s23.ack)
  );

  // 13. ndmerge dadoj,s19,s21;
  df_ndmerge u_op13 (
    .clk, .rst_n, .start,
    .a(dadoj), .stra(str_dadoj), .acka(ack_dadoj),
    .b(s19.data), .strb(s19.str), .ackb(s19.ack),
    .z(s21.data), .strz(s21.str), .ackz(s21.ack)
  );

  // 14. copy s18,s19,s20;
  df_copy u_op14 (
    .clk, .rst_n, .start,
    .a(s18.data), .stra(s18.str), .acka(s18.ack),
    .z1(s19.data), .strz1(s19.str), .ackz1(s19.ack),
    .z2(s20.data), .strz2(s20.str), .ackz2(s20.ack)
  );

  // 15. dmerge s23,dadoh,s12,s24;
  df_dmerge u_op15 (
    .clk, .rst_n, .start,
    .a(s23.data), .stra(s23.str), .acka(s23.ack),
    .b(dadoh), .strb(str_dadoh), .ackb(ack_dadoh),
    .c(s12.data), .strc(s12.str), .ackc(s12.ack),
    .z(s24.data), .strz(s24.str), .ackz(s24.ack)
  );

  // 16. dmerge s20,s21,s26,s22;
  df_dmerge u_op16 (
    .clk, .rst_n, .start,
    .a(s20.data), .stra(s20.str), .acka(s20.ack),
    .b(s21.data), .strb(s21.str), .ackb(s21.ack),
    .c(s26.data), .strc(s26.str), .ackc(s26.ack),
    .z(s22.data), .strz(s22.str), .ackz(s22.ack)
  );

  // 17. copy s24,s25,s26;
  df_copy u_op17 (
    .clk, .rst_n, .start,
    .a(s24.data), .stra(s24.str), .acka(s24.ack),
    .z1(s25.data), .strz1(s25.str), .ackz1(s25.ack),
    .z2(s26.data), .strz2(s26.str), .ackz2(s26.ack)
  );

  // 18. add s13,s14,s15;
  df_primitive #(.OP(OP_ADD)) u_op18 (
    .clk, .rst_n, .start,
    .a(s13.data), .stra(s13.str), .acka(s13.ack),
    .b(s14.data), .strb(s14.str), .ackb(s14.ack),
    .z(s15.data), .strz(s15.str), .ackz(s15.ack)
  );

  // 19. copy s15,s16,s18;
  df_copy u_op19 (
    .clk, .rst_n, .start,
    .a(s15.data), .stra(s15.str), .acka(s15.ack),
    .z1(s16.data), .strz1(s16.str), .ackz1(s16.ack),
    .z2(s18.data), .strz2(s18.str), .ackz2(s18.ack)
  );

  // 20. copy s16,s17,fibo;
  df_copy u_op20 (
    .clk, .rst_n, .start,
    .a(s16.data), .stra(s16.str), .acka(s16.ack),
    .z1(s17.data), .strz1(s17.str), .ackz1(s17.ack),
    .z2(fibo), .strz2(str_fibo), .ackz2(ack_fibo)
  );

endmodule
