// tb_retrieval_unit: end-to-end test of the retrieval unit at its default
// sizes (32-word request memory, 2304-word case base).
//
// The testbench holds each case base as plain arrays (types, implementations,
// attributes, design-time bounds), lays it out as linked NULL-terminated
// lists, loads it through the CB-MEM write port, writes requests through the
// Req-MEM write port and pulses new_req_i. An independent reference model
// rates every implementation directly from the arrays,
//     s_i = 1 - |A_req - A_cb| * R,  R = round(2^15 / (1 + hi - lo)),
// (s_i = 0 if the attribute or its bounds are missing, or d * R >= 1.0),
// S = sum (s_i * w_i) >> 15 saturated at 0xFFFF, best = first strict maximum,
// and the DUT's ID and S_max must match bit for bit.
//
// Scenarios: the FIR-equalizer example (request bitwidth 16, stereo,
// 40 kSamples/s against FPGA, DSP and general-purpose implementations; the
// DSP one must win with S ~ 0.96, the FPGA ~0.85, the processor ~0.43), a
// function type that is not in the case base, an attribute without bounds,
// over-weighted requests (saturation), and random full-size case bases of
// 15 function types x 6 implementations x up to 10 attributes with
// worst-case 10-attribute requests. Internal strobes are watched to count
// each mechanism (type miss, attribute found / missing, list skips,
// missing bounds, s_i clamp, best update / keep, saturation); each must occur.
module tb_retrieval_unit;
  import cbr_pkg::*;

  localparam int REQ_DEPTH = 32;
  localparam int CB_DEPTH  = 2304;
  localparam int REQ_AW    = $clog2(REQ_DEPTH);
  localparam int CB_AW     = $clog2(CB_DEPTH);
  localparam int MAXT = 16, MAXI = 8, MAXA = 10, MAXS = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              new_req = 0;
  logic [REQ_AW-1:0] req_ptr = '0;
  logic [CB_AW-1:0]  cb_root = '0, supp_ptr = '0;
  logic              req_we = 0, cb_we = 0;
  logic [REQ_AW-1:0] req_waddr = '0;
  logic [CB_AW-1:0]  cb_waddr = '0;
  word_t             req_wdata = '0, cb_wdata = '0;
  logic              busy, done, type_found;
  word_t             id_max, s_max;

  retrieval_unit dut (
    .clk_i(clk), .rst_ni(rst_n),
    .new_req_i(new_req), .req_ptr_i(req_ptr), .cb_root_ptr_i(cb_root), .supp_ptr_i(supp_ptr),
    .req_we_i(req_we), .req_waddr_i(req_waddr), .req_wdata_i(req_wdata),
    .cb_we_i(cb_we), .cb_waddr_i(cb_waddr), .cb_wdata_i(cb_wdata),
    .busy_o(busy), .done_o(done), .type_found_o(type_found),
    .id_max_o(id_max), .s_max_o(s_max)
  );

  int checks = 0, failures = 0;

  // ---------------- case base held as arrays ------------------------------
  int n_types;
  int type_id [MAXT];
  int n_impl  [MAXT];
  int impl_id [MAXT][MAXI];
  int n_attr  [MAXT][MAXI];
  int attr_id [MAXT][MAXI][MAXA];
  int attr_val[MAXT][MAXI][MAXA];
  int n_supp;
  int supp_id [MAXS], supp_lo[MAXS], supp_hi[MAXS], supp_r[MAXS];
  // request
  int rq_type, rq_n;
  int rq_id[MAXA], rq_val[MAXA], rq_w[MAXA];

  int cb_img [CB_DEPTH];
  int cb_used, supp_base;

  function automatic int recip_of(int lo, int hi);
    int d1 = hi - lo + 1;
    return (32768 + d1 / 2) / d1;
  endfunction

  // Lay the arrays out as linked lists starting at base.
  task automatic build_image(input int base);
    int p, l1_start[MAXT], l2_start[MAXT][MAXI];
    foreach (cb_img[i]) cb_img[i] = 32'h0000BEEF;
    p = base + 2 * n_types + 1;
    for (int t = 0; t < n_types; t++) begin
      l1_start[t] = p;
      p += 2 * n_impl[t] + 1;
    end
    for (int t = 0; t < n_types; t++)
      for (int k = 0; k < n_impl[t]; k++) begin
        l2_start[t][k] = p;
        p += 2 * n_attr[t][k] + 1;
      end
    supp_base = p;
    cb_used   = p + 4 * n_supp + 1;
    if (cb_used > CB_DEPTH) $fatal(1, "case base does not fit: %0d words", cb_used);
    for (int t = 0; t < n_types; t++) begin
      cb_img[base + 2*t]     = type_id[t];
      cb_img[base + 2*t + 1] = l1_start[t];
      for (int k = 0; k < n_impl[t]; k++) begin
        cb_img[l1_start[t] + 2*k]     = impl_id[t][k];
        cb_img[l1_start[t] + 2*k + 1] = l2_start[t][k];
        for (int j = 0; j < n_attr[t][k]; j++) begin
          cb_img[l2_start[t][k] + 2*j]     = attr_id[t][k][j];
          cb_img[l2_start[t][k] + 2*j + 1] = attr_val[t][k][j];
        end
        cb_img[l2_start[t][k] + 2*n_attr[t][k]] = 0;
      end
      cb_img[l1_start[t] + 2*n_impl[t]] = 0;
    end
    cb_img[base + 2*n_types] = 0;
    for (int s = 0; s < n_supp; s++) begin
      cb_img[supp_base + 4*s]     = supp_id[s];
      cb_img[supp_base + 4*s + 1] = supp_lo[s];
      cb_img[supp_base + 4*s + 2] = supp_hi[s];
      cb_img[supp_base + 4*s + 3] = supp_r[s];
    end
    cb_img[supp_base + 4*n_supp] = 0;
  endtask

  task automatic load_cb(input int base);
    build_image(base);
    for (int a = 0; a < CB_DEPTH; a++) begin
      @(negedge clk);
      cb_we = 1; cb_waddr = CB_AW'(a); cb_wdata = word_t'(cb_img[a]);
    end
    @(negedge clk) cb_we = 0;
    cb_root  = CB_AW'(base);
    supp_ptr = CB_AW'(supp_base);
  endtask

  task automatic load_req(input int ptr);
    int img[REQ_DEPTH];
    int n = 0;
    img[n++] = rq_type;
    for (int j = 0; j < rq_n; j++) begin
      img[n++] = rq_id[j]; img[n++] = rq_val[j]; img[n++] = rq_w[j];
    end
    img[n++] = 0;
    if (ptr + n > REQ_DEPTH) $fatal(1, "request does not fit");
    for (int a = 0; a < n; a++) begin
      @(negedge clk);
      req_we = 1; req_waddr = REQ_AW'(ptr + a); req_wdata = word_t'(img[a]);
    end
    @(negedge clk) req_we = 0;
    req_ptr = REQ_AW'(ptr);
  endtask

  // ---------------- reference model ---------------------------------------
  function automatic int ref_similarity(int t, int k);
    int s = 0;
    for (int j = 0; j < rq_n; j++) begin
      int si = 0, term, r = -1, v = -1;
      for (int q = 0; q < n_supp; q++) if (supp_id[q] == rq_id[j]) r = supp_r[q];
      for (int q = 0; q < n_attr[t][k]; q++) if (attr_id[t][k][q] == rq_id[j]) v = attr_val[t][k][q];
      if (r >= 0 && v >= 0) begin
        int d = (rq_val[j] > v) ? rq_val[j] - v : v - rq_val[j];
        longint p = longint'(d) * r;
        si = (p >= 32768) ? 0 : 32768 - int'(p);
      end
      term = (si * rq_w[j]) >>> 15;
      s += term;
      if (s > 65535) s = 65535;
    end
    return s;
  endfunction

  // expected: found, id, s
  task automatic ref_retrieve(output bit found, output int best_id, output int best_s);
    found = 0; best_id = 0; best_s = 0;
    for (int t = 0; t < n_types; t++) if (type_id[t] == rq_type) begin
      found = 1;
      for (int k = 0; k < n_impl[t]; k++) begin
        int s = ref_similarity(t, k);
        if (s > best_s) begin best_s = s; best_id = impl_id[t][k]; end
      end
    end
  endtask

  // ---------------- mechanism counters ------------------------------------
  int n_type_miss = 0, n_attr_found = 0, n_attr_missing = 0, n_cb_skip = 0;
  int n_supp_skip = 0, n_supp_missing = 0, n_clamp = 0, n_best_upd = 0;
  int n_best_keep = 0, n_saturate = 0;

  // S of each implementation as the DUT finishes it (indexed by ID)
  int dut_s [MAXI + 1];
  always @(posedge clk) if (rst_n && dut.u_ctrl.dp_o.upd_best && 32'(dut.u_dp.u_best.realis_id_o) <= MAXI)
    dut_s[int'(dut.u_dp.u_best.realis_id_o)] = int'(dut.u_dp.u_best.s_i);

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.dp_o.ld_acb) n_attr_found++;
    if (dut.u_ctrl.dp_o.ld_temp && !dut.u_ctrl.dp_o.exist) n_attr_missing++;
    if (dut.u_ctrl.state_q == dut.u_ctrl.S_CB_CMP && dut.u_ctrl.st_i.cmp_lt && !dut.u_ctrl.st_i.cmp_null) n_cb_skip++;
    if (dut.u_ctrl.state_q == dut.u_ctrl.S_SUP_CMP && dut.u_ctrl.st_i.cmp_lt && !dut.u_ctrl.st_i.cmp_null) n_supp_skip++;
    if (dut.u_ctrl.state_q == dut.u_ctrl.S_SUP_CMP && (dut.u_ctrl.st_i.cmp_null || !(dut.u_ctrl.st_i.cmp_eq || dut.u_ctrl.st_i.cmp_lt))) n_supp_missing++;
    if (dut.u_ctrl.dp_o.ld_si && (32'(dut.u_dp.u_local.diff_o) * 32'(dut.u_dp.u_local.recip_i) >= 32768)) n_clamp++;
    if (dut.u_ctrl.dp_o.upd_best &&  dut.u_dp.u_best.gt_o) n_best_upd++;
    if (dut.u_ctrl.dp_o.upd_best && !dut.u_dp.u_best.gt_o) n_best_keep++;
    if (dut.u_ctrl.dp_o.ld_s && (17'(dut.u_dp.u_accum.s_o) + 17'(dut.u_dp.u_accum.temp_o) > 17'(65535))) n_saturate++;
    if (done && !type_found) n_type_miss++;
  end

  // ---------------- run one request and compare ----------------------------
  int total_cycles = 0, n_requests = 0, max_cycles = 0;

  task automatic run_and_check(input string name);
    bit exp_found; int exp_id, exp_s, cyc;
    ref_retrieve(exp_found, exp_id, exp_s);
    @(negedge clk) new_req = 1;
    @(negedge clk) new_req = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 20000) begin
        failures++;
        $display("FAIL %s: no done after %0d cycles", name, cyc);
        return;
      end
    end
    total_cycles += cyc; n_requests++;
    if (cyc > max_cycles) max_cycles = cyc;
    checks++;
    if (type_found !== exp_found || (exp_found && (id_max != word_t'(exp_id) || s_max != word_t'(exp_s)))) begin
      failures++;
      $display("FAIL %s: got found=%0d id=%0d S=%0d, expected found=%0d id=%0d S=%0d",
               name, type_found, id_max, s_max, exp_found, exp_id, exp_s);
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL %s: busy after done", name); end
  endtask

  // ---------------- the FIR-equalizer example ------------------------------
  task automatic setup_example();
    n_types = 2;
    type_id[0] = 1; n_impl[0] = 3;            // FIR equalizer
    // attribute 1: bitwidth, 2: integer mode, 3: output mode, 4: kSamples/s
    impl_id[0][0] = 1; n_attr[0][0] = 4;      // FPGA
    attr_id[0][0] = '{1, 2, 3, 4, 0, 0, 0, 0, 0, 0}; attr_val[0][0] = '{16, 0, 2, 44, 0, 0, 0, 0, 0, 0};
    impl_id[0][1] = 2; n_attr[0][1] = 4;      // DSP
    attr_id[0][1] = '{1, 2, 3, 4, 0, 0, 0, 0, 0, 0}; attr_val[0][1] = '{16, 0, 1, 44, 0, 0, 0, 0, 0, 0};
    impl_id[0][2] = 3; n_attr[0][2] = 4;      // general-purpose processor
    attr_id[0][2] = '{1, 2, 3, 4, 0, 0, 0, 0, 0, 0}; attr_val[0][2] = '{8, 0, 0, 22, 0, 0, 0, 0, 0, 0};
    type_id[1] = 2; n_impl[1] = 1;            // 1-D FFT
    impl_id[1][0] = 1; n_attr[1][0] = 2;
    attr_id[1][0] = '{1, 9, 0, 0, 0, 0, 0, 0, 0, 0}; attr_val[1][0] = '{16, 5, 0, 0, 0, 0, 0, 0, 0, 0};
    n_supp = 4;                               // no bounds for attribute 9
    supp_id = '{1, 2, 3, 4, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    supp_lo = '{8, 0, 0, 8, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    supp_hi = '{16, 1, 2, 44, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    for (int s = 0; s < n_supp; s++) supp_r[s] = recip_of(supp_lo[s], supp_hi[s]);
  endtask

  // ---------------- random full-size case base ------------------------------
  task automatic setup_random(input bit full);
    int tid = 0;
    n_types = 15;
    n_supp  = 10;
    for (int s = 0; s < n_supp; s++) begin
      supp_id[s] = s + 1;
      supp_lo[s] = $urandom_range(0, 200);
      supp_hi[s] = supp_lo[s] + $urandom_range(0, (s == 0) ? 0 : 3000);
      supp_r[s]  = recip_of(supp_lo[s], supp_hi[s]);
    end
    for (int t = 0; t < n_types; t++) begin
      tid += $urandom_range(1, 3);
      type_id[t] = tid;
      n_impl[t]  = full ? 6 : $urandom_range(1, 6);
      for (int k = 0; k < n_impl[t]; k++) begin
        int na = 0;
        impl_id[t][k] = k + 1;
        for (int a = 1; a <= 10; a++)
          if (full || $urandom_range(0, 9) < 7) begin
            attr_id[t][k][na]  = a;
            attr_val[t][k][na] = supp_lo[a-1] + $urandom_range(0, supp_hi[a-1] - supp_lo[a-1]);
            na++;
          end
        n_attr[t][k] = na;
      end
    end
  endtask

  task automatic random_request(input bit all_attrs, input bit miss_type);
    int sum = 0, r[MAXA];
    rq_type = miss_type ? type_id[n_types-1] + 1 : type_id[$urandom_range(0, n_types-1)];
    rq_n = 0;
    for (int a = 1; a <= 10; a++)
      if (all_attrs || $urandom_range(0, 9) < 5) begin
        rq_id[rq_n] = a;
        if ($urandom_range(0, 9) == 0) rq_val[rq_n] = supp_hi[a-1] + $urandom_range(1, 5000);
        else rq_val[rq_n] = supp_lo[a-1] + $urandom_range(0, supp_hi[a-1] - supp_lo[a-1]);
        r[rq_n] = $urandom_range(1, 100);
        sum += r[rq_n];
        rq_n++;
      end
    if (rq_n == 0) begin
      rq_id[0] = 4; rq_val[0] = supp_lo[3]; r[0] = 1; sum = 1; rq_n = 1;
    end
    begin
      int acc = 0;
      for (int j = 0; j < rq_n; j++) begin
        rq_w[j] = (j == rq_n - 1) ? 32768 - acc : (r[j] * 32768) / sum;
        acc += rq_w[j];
      end
    end
  endtask

  // ---------------- watchdog ------------------------------------------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ------------------------------------------------
  initial begin
    bit f; int eid, es;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // FIR-equalizer example, case base placed at word 100, request at word 4
    setup_example();
    load_cb(100);
    rq_type = 1; rq_n = 3;
    rq_id = '{1, 3, 4, 0, 0, 0, 0, 0, 0, 0}; rq_val = '{16, 1, 40, 0, 0, 0, 0, 0, 0, 0};
    rq_w  = '{10923, 10923, 10922, 0, 0, 0, 0, 0, 0, 0};
    load_req(4);
    run_and_check("example");
    // the published rounded figures: DSP best with S ~ 0.96, FPGA ~ 0.85, GP ~ 0.43
    checks++;
    if (id_max != 2 || s_max < word_t'(0.955 * 32768) || s_max > word_t'(0.970 * 32768)) begin
      failures++; $display("FAIL example: id=%0d S=%0f", id_max, real'(s_max) / 32768.0);
    end
    checks++;
    es = dut_s[1];
    if (es < int'(0.845 * 32768) || es > int'(0.860 * 32768)) begin failures++; $display("FAIL FPGA S=%0f", es / 32768.0); end
    checks++;
    es = dut_s[3];
    if (es < int'(0.420 * 32768) || es > int'(0.440 * 32768)) begin failures++; $display("FAIL GP S=%0f", es / 32768.0); end
    $display("example: S(FPGA)=%0f S(DSP)=%0f S(GP)=%0f, best id=%0d",
             dut_s[1] / 32768.0, dut_s[2] / 32768.0, dut_s[3] / 32768.0, id_max);

    // without the stereo attribute the FPGA and DSP tie: the first one wins
    rq_n = 2; rq_id = '{1, 4, 0, 0, 0, 0, 0, 0, 0, 0}; rq_val = '{16, 40, 0, 0, 0, 0, 0, 0, 0, 0};
    rq_w = '{16384, 16384, 0, 0, 0, 0, 0, 0, 0, 0};
    load_req(4);
    run_and_check("tie");
    checks++; if (id_max != 1) begin failures++; $display("FAIL tie: id=%0d", id_max); end

    // function type not in the case base
    rq_type = 5;
    load_req(4);
    run_and_check("type miss");

    // FFT with an attribute that has no bounds in the supplemental list
    rq_type = 2; rq_n = 2; rq_id = '{1, 9, 0, 0, 0, 0, 0, 0, 0, 0}; rq_val = '{12, 5, 0, 0, 0, 0, 0, 0, 0, 0};
    rq_w = '{16384, 16384, 0, 0, 0, 0, 0, 0, 0, 0};
    load_req(0);
    run_and_check("no bounds");

    // over-weighted request: the sum saturates
    rq_type = 1; rq_n = 3;
    rq_id = '{1, 3, 4, 0, 0, 0, 0, 0, 0, 0}; rq_val = '{16, 1, 40, 0, 0, 0, 0, 0, 0, 0};
    rq_w  = '{65535, 65535, 65535, 0, 0, 0, 0, 0, 0, 0};
    load_req(0);
    run_and_check("saturate");
    checks++; if (s_max != 16'hFFFF) begin failures++; $display("FAIL saturate: S=%h", s_max); end

    // random case bases: the first at the full size of the paper's table
    for (int cb = 0; cb < 4; cb++) begin
      setup_random(cb == 0);
      load_cb(0);
      $display("case base %0d: %0d of %0d words used", cb, cb_used, CB_DEPTH);
      for (int q = 0; q < 12; q++) begin
        random_request(q < 3, q == 11);
        load_req(0);
        run_and_check($sformatf("cb%0d req%0d", cb, q));
      end
    end

    $display("requests=%0d mean cycles=%0d max cycles=%0d", n_requests, total_cycles / n_requests, max_cycles);
    $display("mechanisms: type_miss=%0d attr_found=%0d attr_missing=%0d cb_skip=%0d supp_skip=%0d supp_missing=%0d clamp=%0d best_update=%0d best_keep=%0d saturate=%0d",
             n_type_miss, n_attr_found, n_attr_missing, n_cb_skip, n_supp_skip, n_supp_missing,
             n_clamp, n_best_upd, n_best_keep, n_saturate);
    checks++; if (n_type_miss    == 0) begin failures++; $display("FAIL never: type miss"); end
    checks++; if (n_attr_found   == 0) begin failures++; $display("FAIL never: attribute found"); end
    checks++; if (n_attr_missing == 0) begin failures++; $display("FAIL never: attribute missing"); end
    checks++; if (n_cb_skip      == 0) begin failures++; $display("FAIL never: attribute-list skip"); end
    checks++; if (n_supp_skip    == 0) begin failures++; $display("FAIL never: supplemental skip"); end
    checks++; if (n_supp_missing == 0) begin failures++; $display("FAIL never: missing bounds"); end
    checks++; if (n_clamp        == 0) begin failures++; $display("FAIL never: s_i clamp"); end
    checks++; if (n_best_upd     == 0) begin failures++; $display("FAIL never: best update"); end
    checks++; if (n_best_keep    == 0) begin failures++; $display("FAIL never: best kept"); end
    checks++; if (n_saturate     == 0) begin failures++; $display("FAIL never: saturation"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
