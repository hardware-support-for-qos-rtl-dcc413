// tb_retrieval_ctrl: tests the controller with the real data path and two
// testbench RAMs with one-cycle read latency. The case base is the
// FIR-equalizer example (types 1 and 2, three implementations of type 1)
// plus its supplemental list, written word by word below. Checks:
//   - the FIR request (bitwidth 16, stereo, 40 kSamples/s) picks the DSP
//     implementation (ID 2) with S ~ 0.96, type_found = 1;
//   - a request for type 3 (not in the case base) ends with type_found = 0;
//   - the number of busy cycles against the timing documented in the
//     controller (hand count: 206 for the FIR request, 9 for the miss);
//   - done is a single-cycle pulse and new_req is ignored while busy;
//   - the controller never reads outside the words the lists occupy.
module tb_retrieval_ctrl;
  import cbr_pkg::*;
  localparam int REQ_AW = 5, CB_AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic new_req = 0, busy, done, type_found;
  logic [REQ_AW-1:0] req_addr;
  logic [CB_AW-1:0]  cb_addr;
  word_t req_data, cb_data, id_max, s_max;
  dp_ctrl_t ctl;
  dp_stat_t st;
  int checks = 0, failures = 0;

  word_t req_ram [32];
  word_t cb_ram [64];
  always_ff @(posedge clk) begin
    req_data <= req_ram[req_addr];
    cb_data  <= (32'(cb_addr) < 64) ? cb_ram[cb_addr[5:0]] : 16'hDEAD;
  end

  retrieval_ctrl #(.REQ_AW(REQ_AW), .CB_AW(CB_AW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .new_req_i(new_req), .req_ptr_i(REQ_AW'(2)),
    .cb_root_ptr_i(CB_AW'(0)), .supp_ptr_i(CB_AW'(45)),
    .req_addr_o(req_addr), .req_data_i(req_data), .cb_addr_o(cb_addr), .cb_data_i(cb_data),
    .dp_o(ctl), .st_i(st), .busy_o(busy), .done_o(done), .type_found_o(type_found));

  retrieval_datapath u_dp (.clk_i(clk), .rst_ni(rst_n), .req_data_i(req_data), .cb_data_i(cb_data),
                           .ctl_i(ctl), .st_o(st), .id_max_o(id_max), .s_max_o(s_max));

  int busy_cycles = 0, done_cycles = 0, bad_reads = 0;
  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (done) done_cycles++;
    if (busy && 32'(cb_addr) > 61) bad_reads++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int exp_cycles, input bit exp_found, input int exp_id,
                     input int s_lo, input int s_hi, input string name);
    busy_cycles = 0; done_cycles = 0;
    @(negedge clk) new_req = 1;
    @(negedge clk) new_req = 1;          // held: must be ignored while busy
    @(negedge clk) new_req = 0;
    wait (done); @(negedge clk);
    repeat (5) @(negedge clk);
    checks++; if (busy) begin failures++; $display("FAIL %s: restarted", name); end
    checks++; if (done_cycles != 1) begin failures++; $display("FAIL %s: done %0d cycles", name, done_cycles); end
    checks++; if (busy_cycles != exp_cycles) begin failures++; $display("FAIL %s: %0d busy cycles, expected %0d", name, busy_cycles, exp_cycles); end
    checks++; if (type_found != exp_found) begin failures++; $display("FAIL %s: type_found=%0d", name, type_found); end
    if (exp_found) begin
      checks++;
      if (id_max != word_t'(exp_id) || s_max < word_t'(s_lo) || s_max > word_t'(s_hi)) begin
        failures++; $display("FAIL %s: id=%0d S=%0d", name, id_max, s_max);
      end
    end
    $display("%s: found=%0d id=%0d S=%0f cycles=%0d", name, type_found, id_max, real'(s_max) / 32768.0, busy_cycles);
  endtask

  initial begin
    foreach (cb_ram[i]) cb_ram[i] = 16'hBEEF;
    foreach (req_ram[i]) req_ram[i] = 16'hBEEF;
    // level 0
    cb_ram[0] = 1; cb_ram[1] = 5; cb_ram[2] = 2; cb_ram[3] = 12; cb_ram[4] = 0;
    // level 1: type 1 (FPGA, DSP, GP-proc), type 2
    cb_ram[5] = 1; cb_ram[6] = 15; cb_ram[7] = 2; cb_ram[8] = 24; cb_ram[9] = 3; cb_ram[10] = 33; cb_ram[11] = 0;
    cb_ram[12] = 1; cb_ram[13] = 42; cb_ram[14] = 0;
    // level 2: (ID, value) lists
    cb_ram[15] = 1; cb_ram[16] = 16; cb_ram[17] = 2; cb_ram[18] = 0; cb_ram[19] = 3; cb_ram[20] = 2; cb_ram[21] = 4; cb_ram[22] = 44; cb_ram[23] = 0;
    cb_ram[24] = 1; cb_ram[25] = 16; cb_ram[26] = 2; cb_ram[27] = 0; cb_ram[28] = 3; cb_ram[29] = 1; cb_ram[30] = 4; cb_ram[31] = 44; cb_ram[32] = 0;
    cb_ram[33] = 1; cb_ram[34] = 8;  cb_ram[35] = 2; cb_ram[36] = 0; cb_ram[37] = 3; cb_ram[38] = 0; cb_ram[39] = 4; cb_ram[40] = 22; cb_ram[41] = 0;
    cb_ram[42] = 1; cb_ram[43] = 16; cb_ram[44] = 0;
    // supplemental list: (ID, lower, upper, round(2^15 / (1 + upper - lower)))
    cb_ram[45] = 1; cb_ram[46] = 8; cb_ram[47] = 16; cb_ram[48] = 3641;
    cb_ram[49] = 2; cb_ram[50] = 0; cb_ram[51] = 1;  cb_ram[52] = 16384;
    cb_ram[53] = 3; cb_ram[54] = 0; cb_ram[55] = 2;  cb_ram[56] = 10923;
    cb_ram[57] = 4; cb_ram[58] = 8; cb_ram[59] = 44; cb_ram[60] = 886;
    cb_ram[61] = 0;
    // request at word 2: type 1; (1,16,1/3) (3,1,1/3) (4,40,1/3); end
    req_ram[2] = 1;
    req_ram[3] = 1; req_ram[4] = 16; req_ram[5] = 10923;
    req_ram[6] = 3; req_ram[7] = 1;  req_ram[8] = 10923;
    req_ram[9] = 4; req_ram[10] = 40; req_ram[11] = 10922;
    req_ram[12] = 0;

    repeat (3) @(negedge clk); rst_n = 1;
    // 206 = 2 (type) + 3 (level 0) + 3 x 66 (implementations) + 3 (end)
    run(206, 1, 2, 31300, 31800, "FIR request");
    req_ram[2] = 3;
    // 9 = 2 (type) + 3 x 2 (level-0 entries 1, 2, NULL) + 1 (done)
    run(9, 0, 0, 0, 0, "type miss");
    checks++; if (bad_reads != 0) begin failures++; $display("FAIL %0d reads outside the lists", bad_reads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
