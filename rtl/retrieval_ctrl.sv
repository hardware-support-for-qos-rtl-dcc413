// retrieval_ctrl: the controller (with its memory pointers) of the
// most-similar retrieval unit. A pulse on new_req_i starts a retrieval of
// the request list at req_ptr_i in Req-MEM against the case base whose
// level-0 list starts at cb_root_ptr_i in CB-MEM, with the attribute
// supplemental list at supp_ptr_i. The steps are those of the paper's flow
// chart:
//   1. read the wanted function type ID and search the level-0 list for it;
//   2. for each implementation of that type: note its ID, follow its pointer
//      to its attribute list and clear S;
//   3. for each requested attribute (ID, value, weight): search the
//      supplemental list for the attribute's (1+d_max)^-1, then search the
//      implementation's attribute list for its value; if either is missing
//      s_i = 0, else s_i is computed; S accumulates w_i * s_i;
//   4. after the last attribute keep S and the ID if S > S_max;
//   5. after the last implementation raise done_o for one cycle.
// All lists are sorted by ascending ID and end with a NULL (0) entry, so
// each search stops at the first ID that is equal, larger or NULL, and the
// searches for the next attribute continue from where the previous one
// stopped instead of restarting at the top of the list; the search effort
// is therefore linear in the list length.
//
// Timing: the memories have a one-cycle read latency. CTRL drives the read
// addresses combinationally from its state and pointers, and consumes the
// data in the following state. Each list entry visited costs two cycles
// (read, compare) and each ID compared through the data path's comparator
// three (read, latch, compare). busy_o is high from the cycle after
// new_req_i until done_o; new_req_i is ignored while busy. The results
// (ID_max, S_max in the data path) and type_found_o stay valid until the
// next request. type_found_o = 0 with done_o means the function type is not
// in the case base.
//
// The order of the steps follows the paper; the state encoding, the cycle
// timing, the use of sortedness in the level-0 and level-1 lists, and
// treating a missing supplemental entry like a missing attribute are this
// design's choices.
module retrieval_ctrl
  import cbr_pkg::*;
#(
  parameter int unsigned REQ_AW = 5,
  parameter int unsigned CB_AW  = 12
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              new_req_i,
  input  logic [REQ_AW-1:0] req_ptr_i,
  input  logic [CB_AW-1:0]  cb_root_ptr_i,
  input  logic [CB_AW-1:0]  supp_ptr_i,
  output logic [REQ_AW-1:0] req_addr_o,
  input  word_t             req_data_i,
  output logic [CB_AW-1:0]  cb_addr_o,
  input  word_t             cb_data_i,
  output dp_ctrl_t          dp_o,
  input  dp_stat_t          st_i,
  output logic              busy_o,
  output logic              done_o,
  output logic              type_found_o
);

  typedef enum logic [4:0] {
    S_IDLE,
    S_TYPE_RD, S_TYPE_LAT,              // wanted function type from the request
    S_L0_RD, S_L0_CMP, S_L0_PTR,        // level-0 search: type ID, pointer
    S_IMPL_RD, S_IMPL_ID, S_IMPL_PTR,   // level-1: next implementation
    S_ATTR_RD, S_ATTR_ID, S_ATTR_VAL, S_ATTR_W,   // next requested attribute
    S_SUP_RD, S_SUP_LAT, S_SUP_CMP, S_SUP_VAL,    // supplemental-list search
    S_CB_RD, S_CB_LAT, S_CB_CMP, S_CB_VAL,        // level-2 attribute search
    S_DIFF, S_SI, S_TEMP, S_ACC,        // similarity pipeline
    S_BEST,                             // keep best
    S_DONE
  } state_t;

  state_t            state_q, state_d;
  word_t             ftype_q;       // wanted function type ID
  logic [REQ_AW-1:0] req_base_q;    // address of the request's type entry
  logic [REQ_AW-1:0] ra_q;          // current requested-attribute block
  logic [CB_AW-1:0]  lvl_q;         // level-0 / level-1 list position
  logic [CB_AW-1:0]  attr_q;        // level-2 list position
  logic [CB_AW-1:0]  supp_q;        // supplemental list position
  logic              exist_q;       // current attribute rated (Exist A_i_CB)
  logic              type_found_q;

  // next-state and register-update values
  word_t             ftype_d;
  logic [REQ_AW-1:0] req_base_d, ra_d;
  logic [CB_AW-1:0]  lvl_d, attr_d, supp_d;
  logic              exist_d, type_found_d;

  always_comb begin
    state_d      = state_q;
    ftype_d      = ftype_q;
    req_base_d   = req_base_q;
    ra_d         = ra_q;
    lvl_d        = lvl_q;
    attr_d       = attr_q;
    supp_d       = supp_q;
    exist_d      = exist_q;
    type_found_d = type_found_q;
    dp_o         = '0;
    dp_o.exist   = exist_q;
    done_o       = 1'b0;
    req_addr_o   = ra_q;
    cb_addr_o    = lvl_q;

    unique case (state_q)
      S_IDLE: begin
        if (new_req_i) begin
          req_base_d    = req_ptr_i;
          lvl_d         = cb_root_ptr_i;
          type_found_d  = 1'b0;
          dp_o.clr_best = 1'b1;
          state_d       = S_TYPE_RD;
        end
      end

      // ---- function type ---------------------------------------------------
      S_TYPE_RD: begin
        req_addr_o = req_base_q;
        state_d    = S_TYPE_LAT;
      end
      S_TYPE_LAT: begin
        ftype_d = req_data_i;
        state_d = S_L0_RD;
      end
      S_L0_RD: begin
        cb_addr_o = lvl_q;
        state_d   = S_L0_CMP;
      end
      S_L0_CMP: begin
        cb_addr_o = lvl_q + CB_AW'(1);        // reference pointer, used if equal
        if (cb_data_i == NULL_ENTRY || cb_data_i > ftype_q) begin
          state_d = S_DONE;                   // type not in the case base
        end else if (cb_data_i == ftype_q) begin
          state_d = S_L0_PTR;
        end else begin
          lvl_d   = lvl_q + CB_AW'(2);
          state_d = S_L0_RD;
        end
      end
      S_L0_PTR: begin
        lvl_d        = cb_data_i[CB_AW-1:0];  // start of the implementation list
        type_found_d = 1'b1;
        state_d      = S_IMPL_RD;
      end

      // ---- next implementation ---------------------------------------------
      S_IMPL_RD: begin
        cb_addr_o = lvl_q;
        state_d   = S_IMPL_ID;
      end
      S_IMPL_ID: begin
        cb_addr_o = lvl_q + CB_AW'(1);
        if (cb_data_i == NULL_ENTRY) begin
          state_d = S_DONE;                   // last implementation done
        end else begin
          dp_o.ld_id = 1'b1;
          state_d    = S_IMPL_PTR;
        end
      end
      S_IMPL_PTR: begin
        attr_d     = cb_data_i[CB_AW-1:0];    // its attribute list
        lvl_d      = lvl_q + CB_AW'(2);
        ra_d       = req_base_q + REQ_AW'(1); // first requested attribute
        supp_d     = supp_ptr_i;
        dp_o.clr_s = 1'b1;
        state_d    = S_ATTR_RD;
      end

      // ---- next requested attribute ----------------------------------------
      S_ATTR_RD: begin
        req_addr_o = ra_q;
        state_d    = S_ATTR_ID;
      end
      S_ATTR_ID: begin
        req_addr_o = ra_q + REQ_AW'(1);
        if (req_data_i == NULL_ENTRY) begin
          state_d = S_BEST;                   // last attribute done
        end else begin
          dp_o.ld_type_ai = 1'b1;
          state_d         = S_ATTR_VAL;
        end
      end
      S_ATTR_VAL: begin
        req_addr_o  = ra_q + REQ_AW'(2);
        dp_o.ld_ai  = 1'b1;
        state_d     = S_ATTR_W;
      end
      S_ATTR_W: begin
        dp_o.ld_w = 1'b1;
        ra_d      = ra_q + REQ_AW'(3);
        state_d   = S_SUP_RD;
      end

      // ---- supplemental list: (1 + d_max)^-1 -------------------------------
      S_SUP_RD: begin
        cb_addr_o = supp_q;
        state_d   = S_SUP_LAT;
      end
      S_SUP_LAT: begin
        dp_o.ld_type_cb = 1'b1;
        state_d         = S_SUP_CMP;
      end
      S_SUP_CMP: begin
        cb_addr_o = supp_q + CB_AW'(3);       // reciprocal, used if equal
        if (st_i.cmp_null || !(st_i.cmp_eq || st_i.cmp_lt)) begin
          exist_d = 1'b0;                     // no range data: s_i = 0
          state_d = S_TEMP;
        end else if (st_i.cmp_lt) begin
          supp_d  = supp_q + CB_AW'(4);
          state_d = S_SUP_RD;
        end else begin
          state_d = S_SUP_VAL;
        end
      end
      S_SUP_VAL: begin
        dp_o.ld_recip = 1'b1;
        state_d       = S_CB_RD;
      end

      // ---- implementation attribute list -----------------------------------
      S_CB_RD: begin
        cb_addr_o = attr_q;
        state_d   = S_CB_LAT;
      end
      S_CB_LAT: begin
        dp_o.ld_type_cb = 1'b1;
        state_d         = S_CB_CMP;
      end
      S_CB_CMP: begin
        cb_addr_o = attr_q + CB_AW'(1);       // value, used if equal
        if (st_i.cmp_null || !(st_i.cmp_eq || st_i.cmp_lt)) begin
          exist_d = 1'b0;                     // attribute not offered: s_i = 0
          state_d = S_TEMP;
        end else if (st_i.cmp_lt) begin
          attr_d  = attr_q + CB_AW'(2);
          state_d = S_CB_RD;
        end else begin
          state_d = S_CB_VAL;
        end
      end
      S_CB_VAL: begin
        dp_o.ld_acb = 1'b1;
        exist_d     = 1'b1;
        attr_d      = attr_q + CB_AW'(2);
        state_d     = S_DIFF;
      end

      // ---- similarity ------------------------------------------------------
      S_DIFF: begin
        dp_o.ld_diff = 1'b1;
        state_d      = S_SI;
      end
      S_SI: begin
        dp_o.ld_si = 1'b1;
        state_d    = S_TEMP;
      end
      S_TEMP: begin
        dp_o.ld_temp = 1'b1;
        state_d      = S_ACC;
      end
      S_ACC: begin
        dp_o.ld_s = 1'b1;
        state_d   = S_ATTR_RD;
      end

      S_BEST: begin
        dp_o.upd_best = 1'b1;
        state_d       = S_IMPL_RD;
      end

      S_DONE: begin
        done_o  = 1'b1;
        state_d = S_IDLE;
      end

      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      ftype_q      <= '0;
      req_base_q   <= '0;
      ra_q         <= '0;
      lvl_q        <= '0;
      attr_q       <= '0;
      supp_q       <= '0;
      exist_q      <= 1'b0;
      type_found_q <= 1'b0;
    end else begin
      state_q      <= state_d;
      ftype_q      <= ftype_d;
      req_base_q   <= req_base_d;
      ra_q         <= ra_d;
      lvl_q        <= lvl_d;
      attr_q       <= attr_d;
      supp_q       <= supp_d;
      exist_q      <= exist_d;
      type_found_q <= type_found_d;
    end
  end

  assign busy_o       = (state_q != S_IDLE);
  assign type_found_o = type_found_q;

  // Handshake rules: done is a single-cycle pulse, and the best-keeper is
  // only updated after an attribute pass, never while S is accumulating.
  a_done_pulse: assert property (@(posedge clk_i) disable iff (!rst_ni) done_o |=> !done_o)
    else $error("retrieval_ctrl: done_o longer than one cycle");
  a_best_not_with_acc: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                        !(dp_o.upd_best && (dp_o.ld_s || dp_o.clr_s)))
    else $error("retrieval_ctrl: best update while S changes");

endmodule
