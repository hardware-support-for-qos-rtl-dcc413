// best_select: keeps the most similar implementation seen so far.
//
//   ld_id_i    : Realis_ID <= id_i (the implementation now being rated)
//   clr_best_i : S_max, ID_max <= 0 (start of a request)
//   upd_best_i : if S > S_max then S_max <= S, ID_max <= Realis_ID
// The comparison is strict, as printed in the paper's flow chart
// ("S > S_Best"), so of several equally similar implementations the first
// one in the list wins, and an implementation scoring 0 is never chosen:
// ID_max = 0 after a request means that nothing scored above 0 (this
// meaning of 0 is this design's choice). gt_o shows the comparator output.
module best_select
  import cbr_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  word_t id_i,
  input  word_t s_i,
  input  logic  ld_id_i,
  input  logic  clr_best_i,
  input  logic  upd_best_i,
  output word_t realis_id_o,
  output word_t id_max_o,
  output word_t s_max_o,
  output logic  gt_o
);

  assign gt_o = (s_i > s_max_o);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      realis_id_o <= '0;
      id_max_o    <= '0;
      s_max_o     <= '0;
    end else begin
      if (ld_id_i) realis_id_o <= id_i;
      if (clr_best_i) begin
        id_max_o <= '0;
        s_max_o  <= '0;
      end else if (upd_best_i && gt_o) begin
        id_max_o <= realis_id_o;
        s_max_o  <= s_i;
      end
    end
  end

endmodule
