// tb_df_sink: token sink for dataflow testbenches.
//
// Takes tokens from one arc and stores them in `got`.  Its acknowledge acts
// like a receiving operator's register: 0 = ready; after taking a token it
// stays busy (ack = 1) for 1 to 1 + `hold_max` cycles.  While idle it also
// turns busy at random with probability `busy_pct` percent, so senders see
// back-pressure.  `stalls` counts the cycles where a token waited on str
// while ack was 1.
module tb_df_sink
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  data_t data,
  input  logic  str,
  output logic  ack
);
  data_t       got[$];
  int unsigned busy_pct = 0;
  int unsigned hold_max = 0;
  int unsigned stalls   = 0;
  int unsigned hold     = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      ack  <= 1'b0;
      hold = 0;
    end else begin
      if (str && ack) stalls++;
      if (str && !ack) begin
        got.push_back(data);
        ack  <= 1'b1;
        hold = (hold_max == 0) ? 0 : $urandom_range(hold_max);
      end else if (ack) begin
        if (hold == 0) ack <= 1'b0;
        else           hold--;
      end else begin
        ack <= ($urandom_range(99) < busy_pct);
      end
    end
  end
endmodule
