// retrieval_datapath: the data path of the most-similar retrieval unit.
//
// Operand registers are loaded from the two memory read buses under control
// of the strobes in ctl_i (one cycle after CTRL placed the address):
//   from Req_Data : Type A_i, A_i, w_i
//   from CB_Data  : Type A_CB, A_i_CB, (1+D_max_i)^-1, and the implementation
//                   ID (inside best_select)
// The ID comparator compares Type A_CB with Type A_i and reports equal,
// less-than and NULL to CTRL. The same Type A_CB register and comparator
// serve both searches of one attribute: first in the supplemental list (to
// find the reciprocal) and then in the implementation's attribute list.
// local_similarity, similarity_accumulator and best_select form the rest of
// the path, S_i -> TEMP -> S -> S_max / ID_max.
//
// The register set and connections follow the paper's data-path drawing,
// which prints only an equality comparator; the less-than and NULL outputs
// are this design's addition, needed to stop a forward search through a
// sorted list.
module retrieval_datapath
  import cbr_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  word_t    req_data_i,
  input  word_t    cb_data_i,
  input  dp_ctrl_t ctl_i,
  output dp_stat_t st_o,
  output word_t    id_max_o,
  output word_t    s_max_o
);

  word_t type_ai_q, a_i_q, w_q, type_cb_q, a_cb_q, recip_q;
  word_t diff, s_i, temp, s, realis_id;  // diff, temp, realis_id, gt: observation only
  logic  gt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      type_ai_q <= '0;
      a_i_q     <= '0;
      w_q       <= '0;
      type_cb_q <= '0;
      a_cb_q    <= '0;
      recip_q   <= '0;
    end else begin
      if (ctl_i.ld_type_ai) type_ai_q <= req_data_i;
      if (ctl_i.ld_ai)      a_i_q     <= req_data_i;
      if (ctl_i.ld_w)       w_q       <= req_data_i;
      if (ctl_i.ld_type_cb) type_cb_q <= cb_data_i;
      if (ctl_i.ld_acb)     a_cb_q    <= cb_data_i;
      if (ctl_i.ld_recip)   recip_q   <= cb_data_i;
    end
  end

  always_comb begin
    st_o.cmp_eq   = (type_cb_q == type_ai_q);
    st_o.cmp_lt   = (type_cb_q <  type_ai_q);
    st_o.cmp_null = (type_cb_q == NULL_ENTRY);
  end

  local_similarity u_local (
    .clk_i, .rst_ni,
    .a_req_i  (a_i_q),
    .a_cb_i   (a_cb_q),
    .recip_i  (recip_q),
    .ld_diff_i(ctl_i.ld_diff),
    .ld_si_i  (ctl_i.ld_si),
    .diff_o   (diff),
    .s_i_o    (s_i)
  );

  similarity_accumulator u_accum (
    .clk_i, .rst_ni,
    .s_i_i    (s_i),
    .w_i      (w_q),
    .exist_i  (ctl_i.exist),
    .ld_temp_i(ctl_i.ld_temp),
    .clr_s_i  (ctl_i.clr_s),
    .ld_s_i   (ctl_i.ld_s),
    .temp_o   (temp),
    .s_o      (s)
  );

  best_select u_best (
    .clk_i, .rst_ni,
    .id_i       (cb_data_i),
    .s_i        (s),
    .ld_id_i    (ctl_i.ld_id),
    .clr_best_i (ctl_i.clr_best),
    .upd_best_i (ctl_i.upd_best),
    .realis_id_o(realis_id),
    .id_max_o,
    .s_max_o,
    .gt_o       (gt)
  );

endmodule
