// tb_df_src: token source for dataflow testbenches.
//
// Sends the tokens queued with push() on one arc, following the str/ack
// handshake: a token is raised on str and held, unchanged, until a clock
// edge where ack = 0 takes it.  With `constant_en` set the source behaves as
// a constant input that never runs dry: it offers `constant_val` again as
// soon as the previous copy is taken.  `gap_pct` inserts random idle cycles
// between tokens.  `sent` counts the tokens taken by the receiver.
module tb_df_src
  import df_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  output data_t data,
  output logic  str,
  input  logic  ack
);
  data_t       q[$];
  bit          constant_en  = 0;
  data_t       constant_val = '0;
  int unsigned gap_pct      = 0;
  int unsigned sent         = 0;

  function automatic void push(data_t v);
    q.push_back(v);
  endfunction

  function automatic int pending();
    return q.size() + (str ? 1 : 0);
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      str  <= 1'b0;
      data <= '0;
    end else begin
      logic free;
      free = !str;
      if (str && !ack) begin
        sent++;
        str  <= 1'b0;
        free = 1'b1;
      end
      if (free && ($urandom_range(99) >= gap_pct)) begin
        if (q.size() > 0) begin
          data <= q.pop_front();
          str  <= 1'b1;
        end else if (constant_en) begin
          data <= constant_val;
          str  <= 1'b1;
        end
      end
    end
  end
endmodule
