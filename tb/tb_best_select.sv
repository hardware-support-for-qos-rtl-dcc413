// tb_best_select: random sequences of (implementation ID, S) rated one after
// the other; after each update the kept S_max / ID_max must equal the first
// strict maximum seen so far (testbench model). Covers ties (first wins),
// S = 0 (never chosen) and clearing at the start of a request.
module tb_best_select;
  import cbr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t id = '0, s = '0, rid, id_max, s_max;
  logic ld_id = 0, clr = 0, upd = 0, gt;
  int checks = 0, failures = 0, m_id, m_s, n_tie = 0;

  best_select dut (.clk_i(clk), .rst_ni(rst_n), .id_i(id), .s_i(s), .ld_id_i(ld_id),
    .clr_best_i(clr), .upd_best_i(upd), .realis_id_o(rid), .id_max_o(id_max), .s_max_o(s_max), .gt_o(gt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0; m_id = 0; m_s = 0;
      checks++; if (id_max != 0 || s_max != 0) begin failures++; $display("FAIL clear"); end
      for (int k = 1; k <= $urandom_range(1, 8); k++) begin
        int sv;
        case ($urandom_range(0, 4))
          0: sv = 0;
          1: sv = m_s;                       // tie with the best so far
          default: sv = $urandom_range(0, 32768);
        endcase
        if (sv == m_s && sv != 0) n_tie++;
        @(negedge clk) id = word_t'(k + 10 * r); ld_id = 1;
        @(negedge clk) ld_id = 0; s = word_t'(sv);
        checks++; if (rid != word_t'(k + 10 * r)) begin failures++; $display("FAIL realis id"); end
        upd = 1;
        @(negedge clk) upd = 0;
        if (sv > m_s) begin m_s = sv; m_id = k + 10 * r; end
        checks++;
        if (id_max != word_t'(m_id) || s_max != word_t'(m_s)) begin
          failures++; $display("FAIL best: got %0d/%0d expected %0d/%0d", id_max, s_max, m_id, m_s);
        end
      end
    end
    checks++; if (n_tie == 0) begin failures++; $display("FAIL no tie exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
