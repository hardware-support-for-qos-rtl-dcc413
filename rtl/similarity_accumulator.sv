// similarity_accumulator: the back half of the similarity data path. It
// forms the global similarity as the weighted sum of local similarities,
//     S = sum_i w_i * s_i,   with s_i forced to 0 when the implementation
// has no entry for the requested attribute.
//
//   ld_temp_i : TEMP <= (exist_i ? s_i : 0) * w_i   (multiplexer, multiply)
//   clr_s_i   : S    <= 0                           (start of an implementation)
//   ld_s_i    : S    <= S + TEMP
// s_i_i, w_i, TEMP and S are unsigned Q1.15. The multiplexer / multiplier /
// TEMP / adder / S structure follows the paper's data-path drawing. The
// product is truncated to Q1.15, and the sum saturates at 0xFFFF instead of
// wrapping should the weights of a request add up to more than 1 (the paper
// requires them to sum to exactly 1); both are this design's choices.
module similarity_accumulator
  import cbr_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  word_t s_i_i,
  input  word_t w_i,
  input  logic  exist_i,
  input  logic  ld_temp_i,
  input  logic  clr_s_i,
  input  logic  ld_s_i,
  output word_t temp_o,
  output word_t s_o
);

  word_t               s_sel;
  logic [2*WORD_W-1:0] prod;   // Q2.30
  logic [WORD_W:0]     sum;

  always_comb begin
    s_sel = exist_i ? s_i_i : '0;
    prod  = s_sel * w_i;
    sum   = {1'b0, s_o} + {1'b0, temp_o};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      temp_o <= '0;
      s_o    <= '0;
    end else begin
      if (ld_temp_i) temp_o <= word_t'(prod >> FRAC_W);
      if (clr_s_i)     s_o <= '0;
      else if (ld_s_i) s_o <= sum[WORD_W] ? '1 : sum[WORD_W-1:0];
    end
  end

  a_no_clr_and_add: assert property (@(posedge clk_i) disable iff (!rst_ni) !(clr_s_i && ld_s_i))
    else $error("similarity_accumulator: clear and accumulate in the same cycle");

endmodule
