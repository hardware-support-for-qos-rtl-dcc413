// cbr_pkg: types and constants shared by the case-based retrieval unit.
//
// All memory entries are 16-bit words (IDs, attribute values, weights,
// reciprocals and list pointers alike), as in the published design. A list
// ends with a NULL entry; this design encodes NULL as the word 0, which is
// therefore not usable as an ID. Weights w_i, the reciprocals
// (1 + d_max)^-1 and all similarity values are unsigned Q1.15 fixed point
// (0x8000 = 1.0) -- the 16-bit width follows the paper, the Q1.15 format is
// this design's choice.
//
// dp_ctrl_t carries the register-load strobes from the controller to the
// data path; dp_stat_t carries the comparator results back.
package cbr_pkg;

  localparam int unsigned WORD_W = 16;
  localparam int unsigned FRAC_W = 15;

  typedef logic [WORD_W-1:0] word_t;

  localparam word_t NULL_ENTRY = '0;
  localparam word_t FX_ONE     = word_t'(1) << FRAC_W;  // 1.0 in Q1.15

  typedef struct packed {
    logic ld_id;       // Realis_ID   <= CB_Data (implementation ID)
    logic ld_type_ai;  // Type A_i    <= Req_Data
    logic ld_ai;       // A_i         <= Req_Data
    logic ld_w;        // w_i         <= Req_Data
    logic ld_type_cb;  // Type A_CB   <= CB_Data (attribute-list or supplemental ID)
    logic ld_acb;      // A_i_CB      <= CB_Data
    logic ld_recip;    // (1+D_max)^-1 <= CB_Data
    logic ld_diff;     // Diff        <= |A_i - A_i_CB|
    logic ld_si;       // S_i         <= 1 - Diff * (1+D_max)^-1
    logic ld_temp;     // TEMP        <= (exist ? S_i : 0) * w_i
    logic exist;       // Exist A_i_CB multiplexer select
    logic clr_s;       // S           <= 0
    logic ld_s;        // S           <= S + TEMP
    logic clr_best;    // S_max, ID_max <= 0
    logic upd_best;    // if S > S_max: S_max <= S, ID_max <= Realis_ID
  } dp_ctrl_t;

  typedef struct packed {
    logic cmp_eq;    // Type A_CB == Type A_i
    logic cmp_lt;    // Type A_CB <  Type A_i (search must move on)
    logic cmp_null;  // Type A_CB is the NULL entry (end of list)
  } dp_stat_t;

endpackage
