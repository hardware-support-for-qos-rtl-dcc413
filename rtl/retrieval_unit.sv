// retrieval_unit: hardware case-based retrieval of the most similar
// function implementation for a QoS request.
//
// A host writes a request list into Req-MEM (function type, then
// (attribute ID, value, weight) blocks sorted by ID, then 0) and keeps the
// case base in CB-MEM (function-type list -> implementation lists ->
// attribute lists, plus an attribute supplemental list with the
// pre-computed (1 + d_max)^-1 of each attribute type). A pulse on new_req_i
// starts the retrieval; when done_o pulses, id_max_o holds the ID of the
// implementation with the largest weighted similarity
//     S = sum_i w_i * (1 - |A_req_i - A_cb_i| / (1 + d_max_i))
// and s_max_o that similarity in Q1.15 (0x8000 = 1.0). type_found_o = 0
// means the function type is not in the case base; id_max_o = 0 means no
// implementation scored above 0.
//
// Structure (after the paper's data-path drawing): retrieval_ctrl walks the
// lists and strobes the registers of retrieval_datapath, which reads the two
// memory buses Req_Data and CB_Data. Both memories have a one-cycle read
// latency and a host write port (the write ports are this design's
// addition). Sizes default to the paper's: a 32-word request (64 bytes) and
// a 2304-word case base (4.5 kB of 16-bit words).
module retrieval_unit
  import cbr_pkg::*;
#(
  parameter int unsigned REQ_DEPTH = 32,
  parameter int unsigned CB_DEPTH  = 2304,
  parameter int unsigned REQ_AW    = $clog2(REQ_DEPTH),
  parameter int unsigned CB_AW     = $clog2(CB_DEPTH)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // request start
  input  logic              new_req_i,
  input  logic [REQ_AW-1:0] req_ptr_i,
  input  logic [CB_AW-1:0]  cb_root_ptr_i,
  input  logic [CB_AW-1:0]  supp_ptr_i,
  // Req-MEM load port
  input  logic              req_we_i,
  input  logic [REQ_AW-1:0] req_waddr_i,
  input  word_t             req_wdata_i,
  // CB-MEM load port
  input  logic              cb_we_i,
  input  logic [CB_AW-1:0]  cb_waddr_i,
  input  word_t             cb_wdata_i,
  // status and result
  output logic              busy_o,
  output logic              done_o,
  output logic              type_found_o,
  output word_t             id_max_o,
  output word_t             s_max_o
);

  logic [REQ_AW-1:0] req_addr;
  logic [CB_AW-1:0]  cb_addr;
  word_t             req_data, cb_data;
  dp_ctrl_t          dp_ctl;
  dp_stat_t          dp_st;

  req_mem #(.DEPTH(REQ_DEPTH), .AW(REQ_AW)) u_req_mem (
    .clk_i,
    .rd_addr_i(req_addr),
    .rd_data_o(req_data),
    .we_i     (req_we_i),
    .waddr_i  (req_waddr_i),
    .wdata_i  (req_wdata_i)
  );

  cb_mem #(.DEPTH(CB_DEPTH), .AW(CB_AW)) u_cb_mem (
    .clk_i,
    .rd_addr_i(cb_addr),
    .rd_data_o(cb_data),
    .we_i     (cb_we_i),
    .waddr_i  (cb_waddr_i),
    .wdata_i  (cb_wdata_i)
  );

  retrieval_ctrl #(.REQ_AW(REQ_AW), .CB_AW(CB_AW)) u_ctrl (
    .clk_i, .rst_ni,
    .new_req_i,
    .req_ptr_i,
    .cb_root_ptr_i,
    .supp_ptr_i,
    .req_addr_o  (req_addr),
    .req_data_i  (req_data),
    .cb_addr_o   (cb_addr),
    .cb_data_i   (cb_data),
    .dp_o        (dp_ctl),
    .st_i        (dp_st),
    .busy_o,
    .done_o,
    .type_found_o
  );

  retrieval_datapath u_dp (
    .clk_i, .rst_ni,
    .req_data_i(req_data),
    .cb_data_i (cb_data),
    .ctl_i     (dp_ctl),
    .st_o      (dp_st),
    .id_max_o,
    .s_max_o
  );

endmodule
