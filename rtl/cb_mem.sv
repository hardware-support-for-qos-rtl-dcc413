// CB-MEM: holds the case base as one block of concatenated NULL-terminated
// lists: the level-0 function-type list (type ID, pointer), level-1
// implementation lists (implementation ID, pointer), level-2 attribute lists
// (attribute ID, value) and the attribute supplemental list (attribute ID,
// lower bound, upper bound, (1+d_max)^-1). 2304 words = the 4.5 kB of 16-bit
// words the paper gives for 15 function types x 6 implementations x 10
// attributes. Where the supplemental list sits is set by the controller's
// pointer input.
//
// A simple dual-port RAM: one synchronous read port for the retrieval
// controller (data appear on rd_data_o one clock after rd_addr_i, as on a
// block RAM) and one write port through which the host loads the list.
// The contents are not reset. The write port is this design's addition;
// the paper's data-path drawing shows only the read side.
module cb_mem
  import cbr_pkg::*;
#(
  parameter int unsigned DEPTH = 2304,
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
    else $error("cb_mem: write address %0d out of range", waddr_i);

endmodule
