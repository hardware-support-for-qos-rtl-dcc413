// tb_similarity_accumulator: drives random sequences of (s_i, w_i, exist)
// through TEMP and S and compares with a testbench model of
// S = sum (exist ? s_i : 0) * w_i >> 15 (saturating at 0xFFFF). Includes
// the FIR-equalizer example's DSP row (1, 1, 0.89 with weights 1/3) and
// over-weighted sums that must saturate.
module tb_similarity_accumulator;
  import cbr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t si = '0, w = '0, temp, s;
  logic exist = 0, ld_temp = 0, clr_s = 0, ld_s = 0;
  int checks = 0, failures = 0, model = 0;

  similarity_accumulator dut (.clk_i(clk), .rst_ni(rst_n), .s_i_i(si), .w_i(w), .exist_i(exist),
    .ld_temp_i(ld_temp), .clr_s_i(clr_s), .ld_s_i(ld_s), .temp_o(temp), .s_o(s));

  task automatic clear();
    @(negedge clk) clr_s = 1;
    @(negedge clk) clr_s = 0; model = 0;
    checks++; if (s != 0) begin failures++; $display("FAIL clear"); end
  endtask

  task automatic add(input int sv, input int wv, input bit ex);
    int t = ex ? (sv * wv) >>> 15 : 0;
    @(negedge clk) si = word_t'(sv); w = word_t'(wv); exist = ex; ld_temp = 1;
    @(negedge clk) ld_temp = 0; ld_s = 1;
    checks++; if (temp != word_t'(t)) begin failures++; $display("FAIL temp %0d*%0d ex=%0d: %0d vs %0d", sv, wv, ex, temp, t); end
    @(negedge clk) ld_s = 0;
    model += t; if (model > 65535) model = 65535;
    checks++; if (s != word_t'(model)) begin failures++; $display("FAIL S %0d vs %0d", s, model); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    clear();
    add(32768, 10923, 1); add(32768, 10923, 1); add(29228, 10922, 1);
    checks++; if (s < 31500 || s > 31700) begin failures++; $display("FAIL example S=%0d", s); end
    clear();
    add(32768, 16384, 0); add(20000, 16384, 1);
    for (int n = 0; n < 300; n++) begin
      clear();
      for (int j = 0; j < $urandom_range(1, 10); j++)
        add($urandom_range(0, 32768), $urandom_range(0, 65535), $urandom_range(0, 3) != 0);
    end
    checks++; if (s == 0) begin failures++; $display("FAIL nothing accumulated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
