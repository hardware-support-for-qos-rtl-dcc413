// tb_local_similarity: checks s_i = 1 - |A_i - A_CB| * R in Q1.15 against a
// reference computed in the testbench, for the local similarities of the
// FIR-equalizer example (1, ~0.67, ~0.89, ~0.11, ~0.51) and for random
// operands, including products of 1.0 or more (s_i must be 0). Also checks
// that Diff and S_i change only when their load strobes are high.
module tb_local_similarity;
  import cbr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t a, b, r, diff, s_i;
  logic  ld_diff = 0, ld_si = 0;
  int checks = 0, failures = 0;

  local_similarity dut (.clk_i(clk), .rst_ni(rst_n), .a_req_i(a), .a_cb_i(b), .recip_i(r),
                        .ld_diff_i(ld_diff), .ld_si_i(ld_si), .diff_o(diff), .s_i_o(s_i));

  function automatic int ref_s(int x, int y, int rr);
    int d = (x > y) ? x - y : y - x;
    longint p = longint'(d) * rr;
    return (p >= 32768) ? 0 : 32768 - int'(p);
  endfunction

  task automatic one(input int x, input int y, input int rr);
    int d = (x > y) ? x - y : y - x;
    @(negedge clk); a = word_t'(x); b = word_t'(y); r = word_t'(rr); ld_diff = 1;
    @(negedge clk); ld_diff = 0; ld_si = 1;
    checks++; if (diff != word_t'(d)) begin failures++; $display("FAIL diff %0d %0d: %0d", x, y, diff); end
    @(negedge clk); ld_si = 0;
    checks++;
    if (s_i != word_t'(ref_s(x, y, rr))) begin
      failures++; $display("FAIL s_i a=%0d b=%0d r=%0d: got %0d expected %0d", x, y, rr, s_i, ref_s(x, y, rr));
    end
    // hold without strobes
    a = ~a; @(negedge clk);
    checks++; if (diff != word_t'(d) || s_i != word_t'(ref_s(x, y, rr))) begin failures++; $display("FAIL hold"); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rec(int dmax); return (32768 + (dmax + 1) / 2) / (dmax + 1); endfunction

  initial begin
    a = 0; b = 0; r = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    one(16, 16, rec(8));   // 1
    one(1, 2, rec(2));     // 0.667
    one(40, 44, rec(36));  // 0.892
    one(16, 8, rec(8));    // 0.111
    one(40, 22, rec(36));  // 0.514
    checks++; if (s_i < 16700 || s_i > 16900) begin failures++; $display("FAIL 0.51 case %0d", s_i); end
    one(5, 5, 32768);      // d_max = 0
    one(0, 65535, 1);      // largest difference
    one(9, 0, rec(8));     // d > d_max: clamp to 0
    for (int n = 0; n < 2000; n++)
      one($urandom_range(0, 65535), $urandom_range(0, 65535), $urandom_range(0, 32768));
    for (int n = 0; n < 2000; n++) begin
      automatic int x = $urandom_range(0, 3000), dm = $urandom_range(0, 3000);
      one(x, x + $urandom_range(0, dm), rec(dm));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
