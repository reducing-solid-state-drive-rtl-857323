// tb_retry_latency: per-step read-retry latency of the four read-retry modes.
//
// Runs the engine at its default parameters against the behavioural die and
// ECC decoder (1 cycle = 0.1 us) with every table entry at tPRE = 14.4 us,
// i.e. the 40 % precharge reduction that the characterization found safe in
// every tested condition. Reads of LSB, CSB and MSB pages (tR = 78, 117 and
// 78 us at the default tPRE, 91 us on average) need 8 or 20 retry steps; the
// cost of one retry step is taken as (tRETRY(20) - tRETRY(8)) / 12, averaged
// over the three page types, in each mode:
//   regular  tR + tDMA + tECC            PR2    tR
//   AR2      tR' + tDMA + tECC           PnAR2  tR'
// The test checks each against that closed form, and checks the two
// reductions the paper quotes: PR2 shortens a retry step by about 28.5 %
// (tDMA + tECC out of tR + tDMA + tECC), and a 40 % shorter tPRE shortens
// tR by about 25 %.
module tb_retry_latency;
  import rr_pkg::*;

  localparam int CPU = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_pr2_en = 1'b0, cfg_ar2_en = 1'b0;
  logic boot_done;
  logic req_valid = 1'b0, req_ready;
  logic [PAGE_W-1:0] req_page = '0;
  logic [PEC_W-1:0] req_pec = '0;
  logic [RET_W-1:0] req_ret = '0;
  logic resp_valid, resp_ok, resp_fallback;
  logic [STEP_W-1:0] resp_steps;
  logic fl_cmd_valid, fl_cmd_ready;
  flash_cmd_t fl_cmd;
  logic fl_sense_done, fl_dma_done, fl_op_done, fl_rdata_valid;
  logic [31:0] fl_rdata;
  logic ecc_start, ecc_done, ecc_ok;
  logic [STEP_W-1:0] out_step;
  logic [TPRE_W-1:0] out_tpre, tpre_now;
  logic [31:0] rpt_image [36];
  logic proto_err;
  int n_aborted;
  int need_rr = 0;
  logic [TPRE_W-1:0] min_tpre = '0;

  initial for (int i = 0; i < 36; i++) rpt_image[i] = 32'd14400;

  pnar2_top dut (.*);

  nand_chip_model #(.CYC_PER_US(CPU), .RPT_PAGE(0)) u_die (
    .clk, .rst_n, .cmd_valid(fl_cmd_valid), .cmd_ready(fl_cmd_ready), .cmd(fl_cmd),
    .sense_done(fl_sense_done), .dma_done(fl_dma_done), .op_done(fl_op_done),
    .rdata_valid(fl_rdata_valid), .rdata(fl_rdata), .out_step, .out_tpre, .tpre_now,
    .rpt_image, .proto_err, .n_aborted
  );

  ecc_model #(.CYC_PER_US(CPU)) u_ecc (
    .clk, .rst_n, .start(ecc_start), .in_step(out_step), .in_tpre(out_tpre),
    .need_rr, .min_tpre, .done(ecc_done), .ok(ecc_ok)
  );

  int checks = 0, failures = 0;
  longint cyc = 0, t_first_fail = 0, t_resp = 0;
  logic seen_fail = 1'b0, got_resp = 1'b0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (ecc_done && !ecc_ok && !seen_fail) begin seen_fail = 1'b1; t_first_fail = cyc; end
    if (resp_valid) begin got_resp = 1'b1; t_resp = cyc; end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic t_retry(input int page, input int need, input bit pr2, input bit ar2,
                         output longint t);
    seen_fail = 1'b0; got_resp = 1'b0;
    need_rr = need;
    @(negedge clk);
    cfg_pr2_en = pr2; cfg_ar2_en = ar2;
    req_page = PAGE_W'(page); req_pec = 16'd1400; req_ret = 16'd300;
    req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    while (!got_resp) @(negedge clk);
    while (!req_ready) @(negedge clk);
    check(resp_ok && int'(resp_steps) == need, "read decoded after the expected steps");
    t = t_resp - t_first_fail;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real step_us [4];
    real expect_us [4];
    real tr_avg, trr_avg, r_pr2, r_ar2;
    string names [4];
    longint t8, t20;
    names = '{"regular", "PR2", "AR2", "PnAR2"};
    // averages over LSB, CSB, MSB: N_SENSE = 2, 3, 2
    tr_avg  = (2.0 + 3.0 + 2.0) / 3.0 * (24.0 + 5.0 + 10.0);
    trr_avg = (2.0 + 3.0 + 2.0) / 3.0 * (14.4 + 5.0 + 10.0);
    expect_us = '{tr_avg + 36.0, tr_avg, trr_avg + 36.0, trr_avg};

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (boot_done);

    for (int mode = 0; mode < 4; mode++) begin
      real acc;
      acc = 0.0;
      for (int pg = 0; pg < 3; pg++) begin
        t_retry(30 + pg, 8,  1'(mode & 1), 1'(mode >> 1), t8);
        t_retry(30 + pg, 20, 1'(mode & 1), 1'(mode >> 1), t20);
        acc += real'(t20 - t8) / 12.0 / CPU;
      end
      step_us[mode] = acc / 3.0;
      $display("%-8s retry step %7.2f us (closed form %7.2f us)", names[mode], step_us[mode], expect_us[mode]);
      check(step_us[mode] >= expect_us[mode] - 0.2 && step_us[mode] <= expect_us[mode] + 1.0,
            $sformatf("%s: step latency %0.2f us against %0.2f us", names[mode], step_us[mode], expect_us[mode]));
    end

    r_pr2 = 1.0 - step_us[1] / step_us[0];
    r_ar2 = 1.0 - step_us[3] / step_us[1];
    $display("PR2 step reduction over regular: %0.1f %% (paper: 28.5 %%)", 100.0 * r_pr2);
    $display("AR2 tR reduction (PnAR2 over PR2): %0.1f %% (paper: 25 %%)", 100.0 * r_ar2);
    $display("PnAR2 step reduction over regular: %0.1f %%", 100.0 * (1.0 - step_us[3] / step_us[0]));
    check(r_pr2 > 0.275 && r_pr2 < 0.295, "PR2 reduction near 28.5 %");
    check(r_ar2 > 0.235 && r_ar2 < 0.265, "AR2 reduction near 25 %");
    check(!proto_err && tpre_now == DEFAULT_TPRE_NS, "die clean at the end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
