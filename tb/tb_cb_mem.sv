// tb_cb_mem: self-check of the cb_mem RAM at its default depth (2304 words).
// Fills every word with a random value through the write port, then reads
// all words back in random order and checks each value appears on
// rd_data_o exactly one clock after its address (one-cycle read latency),
// and that a read in the same cycle as a write to that address returns
// the old word (read-before-write).
module tb_cb_mem;
  import cbr_pkg::*;
  localparam int DEPTH = 2304;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] rd_addr = '0, waddr = '0;
  logic          we = 0;
  word_t         wdata = '0, rd_data;
  word_t         model [DEPTH];
  int checks = 0, failures = 0;

  cb_mem dut (.clk_i(clk), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
          .we_i(we), .waddr_i(waddr), .wdata_i(wdata));

  initial begin
    repeat (20 * DEPTH + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = word_t'($urandom); model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 2 * DEPTH; n++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      @(negedge clk) rd_addr = AW'(a);
      @(negedge clk);
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: got %h expected %h", a, rd_data, model[a]);
      end
    end
    // read during a write to the same address returns the old word
    for (int n = 0; n < 20; n++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      automatic word_t old = model[a];
      @(negedge clk);
      rd_addr = AW'(a); we = 1; waddr = AW'(a); wdata = ~old; model[a] = ~old;
      @(negedge clk) we = 0;
      checks++;
      if (rd_data != old) begin failures++; $display("FAIL rbw addr %0d", a); end
      @(negedge clk);
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL after write addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
