// tb_retrieval_datapath: drives the data path's load strobes directly, in
// the order the controller uses them, with values placed on the Req_Data
// and CB_Data buses, and checks: the ID comparator (equal / less / NULL),
// S after each implementation, and the kept ID_max / S_max, against a
// testbench model. The first request is the FIR-equalizer example (the DSP
// implementation, ID 2, must win with S ~ 0.96); random requests follow.
module tb_retrieval_datapath;
  import cbr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t req_data = '0, cb_data = '0, id_max, s_max;
  dp_ctrl_t ctl = '0;
  dp_stat_t st;
  int checks = 0, failures = 0;

  retrieval_datapath dut (.clk_i(clk), .rst_ni(rst_n), .req_data_i(req_data), .cb_data_i(cb_data),
                          .ctl_i(ctl), .st_o(st), .id_max_o(id_max), .s_max_o(s_max));

  task automatic strobe(input dp_ctrl_t c);
    @(negedge clk) ctl = c;
    @(negedge clk) ctl = '0;
  endtask

  task automatic check_cmp(input int ta, input int tc);
    dp_ctrl_t c;
    c = '0; c.ld_type_cb = 1; cb_data = word_t'(tc); strobe(c);
    checks++;
    if (st.cmp_eq != (ta == tc) || st.cmp_lt != (tc < ta) || st.cmp_null != (tc == 0)) begin
      failures++; $display("FAIL cmp %0d vs %0d: %b", ta, tc, st);
    end
  endtask

  // rate one attribute; returns the weighted term of the model
  task automatic attribute(input int ta, input int a, input int w, input bit ex, input int acb,
                           input int r, inout int s_model);
    dp_ctrl_t c;
    int d, si, t;
    c = '0; c.ld_type_ai = 1; req_data = word_t'(ta); strobe(c);
    c = '0; c.ld_ai = 1;      req_data = word_t'(a);  strobe(c);
    c = '0; c.ld_w = 1;       req_data = word_t'(w);  strobe(c);
    check_cmp(ta, ex ? ta : ta + 1);
    c = '0; c.ld_recip = 1;   cb_data = word_t'(r);   strobe(c);
    c = '0; c.ld_acb = 1;     cb_data = word_t'(acb); strobe(c);
    c = '0; c.ld_diff = 1; strobe(c);
    c = '0; c.ld_si = 1;   strobe(c);
    c = '0; c.ld_temp = 1; c.exist = ex; strobe(c);
    c = '0; c.ld_s = 1;    strobe(c);
    d  = (a > acb) ? a - acb : acb - a;
    si = (longint'(d) * r >= 32768) ? 0 : 32768 - d * r;
    t  = ex ? (si * w) >>> 15 : 0;
    s_model += t; if (s_model > 65535) s_model = 65535;
  endtask

  int best_id, best_s;
  task automatic implementation(input int id, input int n, input int ta[10], input int a[10],
                                input int w[10], input bit ex[10], input int acb[10], input int r[10]);
    dp_ctrl_t c;
    int s_model = 0;
    c = '0; c.ld_id = 1; cb_data = word_t'(id); strobe(c);
    c = '0; c.clr_s = 1; strobe(c);
    for (int j = 0; j < n; j++) attribute(ta[j], a[j], w[j], ex[j], acb[j], r[j], s_model);
    checks++;
    if (dut.s != word_t'(s_model)) begin failures++; $display("FAIL S impl %0d: %0d vs %0d", id, dut.s, s_model); end
    c = '0; c.upd_best = 1; strobe(c);
    if (s_model > best_s) begin best_s = s_model; best_id = id; end
    checks++;
    if (id_max != word_t'(best_id) || s_max != word_t'(best_s)) begin
      failures++; $display("FAIL best: %0d/%0d vs %0d/%0d", id_max, s_max, best_id, best_s);
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dp_ctrl_t c;
    int ta[10], a[10], w[10], acb[10], r[10];
    bit ex[10];
    repeat (2) @(negedge clk); rst_n = 1;
    // comparator corner cases
    c = '0; c.ld_type_ai = 1; req_data = 7; strobe(c);
    check_cmp(7, 7); check_cmp(7, 3); check_cmp(7, 9); check_cmp(7, 0);
    // FIR-equalizer example: attributes 1, 3, 4, reciprocals of 9, 3, 37
    c = '0; c.clr_best = 1; strobe(c); best_id = 0; best_s = 0;
    ta = '{1, 3, 4, 0, 0, 0, 0, 0, 0, 0}; a = '{16, 1, 40, 0, 0, 0, 0, 0, 0, 0};
    w  = '{10923, 10923, 10922, 0, 0, 0, 0, 0, 0, 0}; ex = '{1, 1, 1, 0, 0, 0, 0, 0, 0, 0};
    r  = '{3641, 10923, 886, 0, 0, 0, 0, 0, 0, 0};
    acb = '{16, 2, 44, 0, 0, 0, 0, 0, 0, 0}; implementation(1, 3, ta, a, w, ex, acb, r);
    acb = '{16, 1, 44, 0, 0, 0, 0, 0, 0, 0}; implementation(2, 3, ta, a, w, ex, acb, r);
    acb = '{8, 0, 22, 0, 0, 0, 0, 0, 0, 0};  implementation(3, 3, ta, a, w, ex, acb, r);
    checks++;
    if (id_max != 2 || s_max < 31300 || s_max > 31800) begin failures++; $display("FAIL example %0d %0d", id_max, s_max); end
    // random requests
    for (int q = 0; q < 40; q++) begin
      c = '0; c.clr_best = 1; strobe(c); best_id = 0; best_s = 0;
      checks++; if (id_max != 0 || s_max != 0) begin failures++; $display("FAIL clr_best"); end
      for (int k = 1; k <= 6; k++) begin
        automatic int n = $urandom_range(1, 10);
        for (int j = 0; j < n; j++) begin
          ta[j] = j + 1; a[j] = $urandom_range(0, 1000); w[j] = 32768 / n;
          ex[j] = ($urandom_range(0, 4) != 0); acb[j] = $urandom_range(0, 1000);
          r[j] = $urandom_range(30, 200);
        end
        implementation(k, n, ta, a, w, ex, acb, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
