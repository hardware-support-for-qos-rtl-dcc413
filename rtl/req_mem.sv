// Req-MEM: holds the request list: the wanted function type ID, then
// one block (attribute ID, value, weight w_i) per constraining attribute,
// sorted by ascending attribute ID, then a NULL entry. 32 words = the 64 bytes
// the paper gives for a worst-case request of 10 attributes.
//
// A simple dual-port RAM: one synchronous read port for the retrieval
// controller (data appear on rd_data_o one clock after rd_addr_i, as on a
// block RAM) and one write port through which the host loads the list.
// The contents are not reset. The write port is this design's addition;
// the paper's data-path drawing shows only the read side.
module req_mem
  import cbr_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic [AW-1:0] rd_addr_i,
  output word_t         rd_data_o,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  word_t         wdata_i
);

  word_t mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    rd_data_o <= mem[rd_addr_i];
  end

  // A write beyond the array would be lost silently.
  a_waddr_in_range: assert property (@(posedge clk_i) we_i |-> (32'(waddr_i) < DEPTH))
    else $error("req_mem: write address %0d out of range", waddr_i);

endmodule
