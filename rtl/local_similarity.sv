// local_similarity: the front half of the retrieval data path. It computes
// the local similarity of one attribute,
//     s_i = 1 - |A_i - A_i_CB| * (1 + d_max)^-1,
// from the requested value A_i, the case-base value A_i_CB and the
// pre-computed reciprocal of (1 + d_max). As in the paper, a multiplication
// by the stored reciprocal replaces the division, so no divider is needed.
//
// Two register stages, each loaded by a strobe from the controller:
//   ld_diff_i : Diff <= |A_i - A_i_CB|      (subtract, absolute value)
//   ld_si_i   : S_i  <= 1 - Diff * recip    (16x16 multiply, then 1 - x)
// Values are unsigned 16-bit integers; recip_i and s_i_o are Q1.15. The
// subtract/ABS/Diff/multiply/S_i chain follows the paper's data-path
// drawing. Unsigned values, Q1.15, truncating the product, and clamping s_i
// to 0 when the product reaches 1.0 (a request value outside the
// design-time bounds) are this design's choices.
module local_similarity
  import cbr_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  word_t a_req_i,
  input  word_t a_cb_i,
  input  word_t recip_i,
  input  logic  ld_diff_i,
  input  logic  ld_si_i,
  output word_t diff_o,
  output word_t s_i_o
);

  word_t                 abs_diff;
  logic [2*WORD_W-1:0]   prod;      // Q17.15 (integer x Q1.15)
  word_t                 s_next;

  always_comb begin
    abs_diff = (a_req_i >= a_cb_i) ? (a_req_i - a_cb_i) : (a_cb_i - a_req_i);
    prod     = diff_o * recip_i;
    // d / (1 + d_max) < 1 whenever d <= d_max; otherwise similarity is 0.
    if (prod[2*WORD_W-1:FRAC_W] != '0) s_next = '0;
    else                               s_next = FX_ONE - word_t'(prod[FRAC_W-1:0]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      diff_o <= '0;
      s_i_o  <= '0;
    end else begin
      if (ld_diff_i) diff_o <= abs_diff;
      if (ld_si_i)   s_i_o  <= s_next;
    end
  end

endmodule
