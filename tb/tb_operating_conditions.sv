// tb_operating_conditions: page-read latency of the four read-retry modes
// under the operating conditions whose retry-step counts the paper prints.
//
// Each condition is a (P/E cycles, retention age) pair with the number of
// retry steps a read needs there:
//   fresh          0 P/E,   0 days    0 steps
//   6 months       0 P/E, 180 days    7 steps  (54.4 % of reads need >= 7)
//   3 months at 1K 1K P/E, 90 days    8 steps  (every read needs >= 8)
//   1 year at 2K   2K P/E, 365 days   19.9 on average (27 reads at 20,
//                                     3 at 19)
// Every condition is read in regular, PR2, AR2 and PnAR2 mode, on an equal
// mix of LSB, CSB and MSB pages, by two copies of the engine, each with its
// own die and ECC decoder model (10 cycles per microsecond):
//  * sys[0], the engine at its default parameters: its table stops at 1.5K
//    P/E cycles and 360 days, so the 1-year/2K reads miss it and get PR2
//    only;
//  * sys[1], the same engine with the table extended to 9 x 7 bins (up to
//    2,250 P/E cycles and 420 days), which covers those reads.
// Both tables hold tPRE = 14.4 us (40 % below the default), which the
// characterization found safe under every tested condition.
// Checked: each read's latency from request to response against its closed
// form (the first read, tR + tDMA + tECC, plus the retry time of the mode);
// that a fresh read costs the same in every mode; that 19.9 regular retry
// steps make a read about 21 times slower than a fresh read, as the paper
// states; that the default engine gives PnAR2 the PR2 latency at 1 year/2K
// and the extended one cuts it.
module tb_operating_conditions;
  import rr_pkg::*;

  localparam int CPU = 10;
  localparam int NSYS = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_pr2_en = 1'b0, cfg_ar2_en = 1'b0;
  logic boot_done [NSYS];
  logic req_valid [NSYS];
  logic req_ready [NSYS];
  logic [PAGE_W-1:0] req_page = '0;
  logic [PEC_W-1:0] req_pec = '0;
  logic [RET_W-1:0] req_ret = '0;
  logic resp_valid [NSYS], resp_ok [NSYS], resp_fallback [NSYS];
  logic [STEP_W-1:0] resp_steps [NSYS];
  logic proto_err [NSYS];
  logic [TPRE_W-1:0] tpre_now [NSYS];
  int need_rr = 0;
  logic [TPRE_W-1:0] min_tpre = '0;

  longint cyc = 0;
  longint t_req [NSYS], t_resp [NSYS];
  logic got_resp [NSYS], r_ok [NSYS];
  logic [STEP_W-1:0] r_steps [NSYS];

  always @(posedge clk) cyc <= cyc + 1;

  for (genvar g = 0; g < NSYS; g++) begin : sys
    localparam int NP = (g == 0) ? 6 : 9;
    localparam int NR = (g == 0) ? 6 : 7;
    logic fl_cmd_valid, fl_cmd_ready;
    flash_cmd_t fl_cmd;
    logic fl_sense_done, fl_dma_done, fl_op_done, fl_rdata_valid;
    logic [31:0] fl_rdata;
    logic ecc_start, ecc_done, ecc_ok;
    logic [STEP_W-1:0] out_step;
    logic [TPRE_W-1:0] out_tpre;
    logic [31:0] img [NP * NR];
    int n_aborted;

    initial for (int i = 0; i < NP * NR; i++) img[i] = 32'd14400;

    pnar2_top #(.N_PEC_BINS(NP), .N_RET_BINS(NR)) u_top (
      .clk, .rst_n, .cfg_pr2_en, .cfg_ar2_en, .boot_done(boot_done[g]),
      .req_valid(req_valid[g]), .req_ready(req_ready[g]), .req_page, .req_pec, .req_ret,
      .resp_valid(resp_valid[g]), .resp_ok(resp_ok[g]), .resp_steps(resp_steps[g]),
      .resp_fallback(resp_fallback[g]),
      .fl_cmd_valid, .fl_cmd_ready, .fl_cmd, .fl_sense_done, .fl_dma_done, .fl_op_done,
      .fl_rdata_valid, .fl_rdata, .ecc_start, .ecc_done, .ecc_ok
    );

    nand_chip_model #(.CYC_PER_US(CPU), .RPT_PAGE(0), .RPT_WORDS(NP * NR)) u_die (
      .clk, .rst_n, .cmd_valid(fl_cmd_valid), .cmd_ready(fl_cmd_ready), .cmd(fl_cmd),
      .sense_done(fl_sense_done), .dma_done(fl_dma_done), .op_done(fl_op_done),
      .rdata_valid(fl_rdata_valid), .rdata(fl_rdata), .out_step, .out_tpre,
      .tpre_now(tpre_now[g]), .rpt_image(img), .proto_err(proto_err[g]), .n_aborted
    );

    ecc_model #(.CYC_PER_US(CPU)) u_ecc (
      .clk, .rst_n, .start(ecc_start), .in_step(out_step), .in_tpre(out_tpre),
      .need_rr, .min_tpre, .done(ecc_done), .ok(ecc_ok)
    );

    always @(posedge clk) begin
      if (req_valid[g] && req_ready[g]) t_req[g] = cyc;
      if (resp_valid[g]) begin
        got_resp[g] = 1'b1; t_resp[g] = cyc; r_ok[g] = resp_ok[g]; r_steps[g] = resp_steps[g];
      end
    end
  end

  int checks = 0, failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint cy(longint ns);
    return (ns * CPU + 999) / 1000;
  endfunction
  function automatic longint tr(int page, longint tpre);
    return cy(((page % 3 == 1) ? 3 : 2) * (tpre + 5000 + 10000));
  endfunction

  // One read on system s; returns its latency in cycles after checking it
  // against the closed form of the mode.
  task automatic do_read(int s, int page, int pec, int ret, int need, int mode,
                         output longint t);
    bit pr2, ar2, hit;
    longint d, t_def, t_red, expect_t;
    pr2 = mode[0];
    ar2 = mode[1];
    hit = (s == 0) ? (pec < 1500 && ret < 360) : (pec < 2250 && ret < 420);
    d = cy(16000) + cy(20000);
    t_def = tr(page, 24000);
    t_red = (ar2 && hit) ? tr(page, 14400) : t_def;
    expect_t = t_def + d;
    if (need > 0) begin
      if (ar2 && hit) expect_t += cy(1000);
      expect_t += pr2 ? need * t_red + d : need * (t_red + d);
    end

    got_resp[s] = 1'b0;
    need_rr = need;
    @(negedge clk);
    cfg_pr2_en = pr2; cfg_ar2_en = ar2;
    req_page = PAGE_W'(page); req_pec = PEC_W'(pec); req_ret = RET_W'(ret);
    req_valid[s] = 1'b1;
    while (!req_ready[s]) @(negedge clk);
    @(negedge clk);
    req_valid[s] = 1'b0;
    while (!got_resp[s]) @(negedge clk);
    while (!req_ready[s]) @(negedge clk);
    t = t_resp[s] - t_req[s];
    check(r_ok[s] && int'(r_steps[s]) == need,
          $sformatf("sys%0d page %0d: ok=%b steps=%0d, need %0d", s, page, r_ok[s], r_steps[s], need));
    check(t >= expect_t && t <= expect_t + 8 * (need + 3),
          $sformatf("sys%0d mode %0d page %0d need %0d: %0d cycles, closed form %0d",
                    s, mode, page, need, t, expect_t));
    check(!proto_err[s] && tpre_now[s] == DEFAULT_TPRE_NS, "die clean after the read");
  endtask

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string cname [4];
    string mname [4];
    int c_pec [4], c_ret [4], c_n [4], c_need [4];
    real mean_us [NSYS][4][4];
    real fresh_us, ratio;
    longint t;
    cname  = '{"fresh", "0 P/E, 6 months", "1K P/E, 3 months", "2K P/E, 1 year"};
    mname  = '{"regular", "PR2", "AR2", "PnAR2"};
    c_pec  = '{0, 0, 1000, 2000};
    c_ret  = '{0, 180, 90, 365};
    c_n    = '{6, 6, 6, 30};
    c_need = '{0, 7, 8, 20};
    for (int s = 0; s < NSYS; s++) req_valid[s] = 1'b0;

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (boot_done[0] && boot_done[1]);

    for (int s = 0; s < NSYS; s++)
      for (int c = 0; c < 4; c++)
        for (int m = 0; m < 4; m++) begin
          longint sum;
          sum = 0;
          for (int k = 0; k < c_n[c]; k++) begin
            int need;
            // 19.9 average at 1 year / 2K: 3 of the 30 reads need 19 steps
            need = (c == 3 && k < 3) ? 19 : c_need[c];
            do_read(s, 300 + k, c_pec[c], c_ret[c], need, m, t);
            sum += t;
          end
          mean_us[s][c][m] = real'(sum) / c_n[c] / CPU;
        end

    for (int s = 0; s < NSYS; s++) begin
      $display("sys%0d (%s table): mean read latency in us, and reduction against regular",
               s, s == 0 ? "default 6 x 6" : "extended 9 x 7");
      for (int c = 0; c < 4; c++)
        $display("  %-17s regular %7.1f  PR2 %7.1f (%5.1f %%)  AR2 %7.1f (%5.1f %%)  PnAR2 %7.1f (%5.1f %%)",
                 cname[c], mean_us[s][c][0],
                 mean_us[s][c][1], 100.0 * (1.0 - mean_us[s][c][1] / mean_us[s][c][0]),
                 mean_us[s][c][2], 100.0 * (1.0 - mean_us[s][c][2] / mean_us[s][c][0]),
                 mean_us[s][c][3], 100.0 * (1.0 - mean_us[s][c][3] / mean_us[s][c][0]));
    end

    for (int s = 0; s < NSYS; s++)
      for (int m = 1; m < 4; m++)
        check(mean_us[s][0][m] - mean_us[s][0][0] < 0.5 && mean_us[s][0][0] - mean_us[s][0][m] < 0.5,
              $sformatf("sys%0d: fresh read costs the same in %s mode", s, mname[m]));
    fresh_us = mean_us[0][0][0];
    ratio = mean_us[0][3][0] / fresh_us;
    $display("regular read at 2K P/E, 1 year: %0.1f x a fresh read (paper: 21 x)", ratio);
    check(ratio > 20.5 && ratio < 21.5, "19.9 retry steps make a read about 21 x slower");
    check(mean_us[0][3][3] - mean_us[0][3][1] < 1.0 && mean_us[0][3][1] - mean_us[0][3][3] < 1.0,
          "default table misses at 2K / 1 year: PnAR2 = PR2");
    check(mean_us[1][3][3] < 0.8 * mean_us[1][3][1], "extended table cuts PnAR2 below PR2 at 2K / 1 year");
    for (int c = 1; c < 3; c++)
      check(mean_us[0][c][3] < mean_us[0][c][1] && mean_us[0][c][1] < mean_us[0][c][0],
            $sformatf("%s: PnAR2 < PR2 < regular", cname[c]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
