// tb_read_retry_ctrl: self-checking test of the read-retry sequencer.
//
// The sequencer drives the behavioural die and ECC models; a small responder
// stands in for the read-timing parameter table. Each case issues one read
// whose page needs a chosen number of retry steps and checks:
//  * the response (ok, retry steps, fallback flag);
//  * the commands seen on the die port (PAGE READ, CACHE READ, end of cache
//    read, RESET, SET FEATURE and its values), counted by a monitor;
//  * the read-retry latency tRETRY, from the first ECC failure to the
//    response, against the closed forms
//      regular: N x (tR + tDMA + tECC)
//      PR2:     N x tR + tDMA + tECC
//      AR2:     tSET + N x (tR' + tDMA + tECC)
//      PnAR2:   tSET + N x tR' + tDMA + tECC
//    with a few cycles of command overhead per step allowed;
//  * that the die is back at the default tPRE and saw no protocol error.
// Time base: 10 clock cycles per microsecond.
module tb_read_retry_ctrl;
  import rr_pkg::*;

  localparam int CPU = 10;           // cycles per microsecond
  localparam int MAXR = 31;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_pr2_en = 1'b0, cfg_ar2_en = 1'b0;
  logic req_valid = 1'b0, req_ready;
  logic [PAGE_W-1:0] req_page = '0;
  logic [PEC_W-1:0] req_pec = '0;
  logic [RET_W-1:0] req_ret = '0;
  logic resp_valid, resp_ok, resp_fallback;
  logic [STEP_W-1:0] resp_steps;
  logic rpt_q_valid;
  logic [PEC_W-1:0] rpt_q_pec;
  logic [RET_W-1:0] rpt_q_ret;
  logic rpt_r_valid = 1'b0, rpt_r_hit = 1'b0;
  logic [TPRE_W-1:0] rpt_r_tpre = '0;
  logic cmd_valid, cmd_ready;
  flash_cmd_t cmd;
  logic fl_sense_done, fl_dma_done, fl_op_done;
  logic ecc_start, ecc_done, ecc_ok;

  logic rdata_valid;
  logic [31:0] rdata;
  logic [STEP_W-1:0] out_step;
  logic [TPRE_W-1:0] out_tpre, tpre_now;
  logic [31:0] rpt_image [36];
  logic proto_err;
  int n_aborted;
  int need_rr = 0;
  logic [TPRE_W-1:0] min_tpre = '0;

  initial for (int i = 0; i < 36; i++) rpt_image[i] = '0;

  read_retry_ctrl dut (.*);

  nand_chip_model #(.CYC_PER_US(CPU), .RPT_PAGE(1 << 21)) u_die (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .sense_done(fl_sense_done), .dma_done(fl_dma_done), .op_done(fl_op_done),
    .rdata_valid, .rdata, .out_step, .out_tpre, .tpre_now, .rpt_image,
    .proto_err, .n_aborted
  );

  ecc_model #(.CYC_PER_US(CPU)) u_ecc (
    .clk, .rst_n, .start(ecc_start), .in_step(out_step), .in_tpre(out_tpre),
    .need_rr, .min_tpre, .done(ecc_done), .ok(ecc_ok)
  );

  // stand-in for the table: answers one cycle after the query
  logic              tab_hit = 1'b1;
  logic [TPRE_W-1:0] tab_tpre = 32'd14000;
  always_ff @(posedge clk) begin
    rpt_r_valid <= rpt_q_valid;
    rpt_r_hit   <= tab_hit;
    rpt_r_tpre  <= tab_tpre;
  end

  // monitor
  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_page, n_cache, n_end, n_rst, n_setf, n_dout, n_query;
  logic [TPRE_W-1:0] setf_vals [4];
  longint t_first_fail, t_resp, t_req;
  logic seen_fail;
  logic got_resp;
  logic r_ok, r_fb;
  logic [STEP_W-1:0] r_steps;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd_valid && cmd_ready) begin
      unique case (cmd.op)
        OP_PAGE_READ:   n_page++;
        OP_CACHE_READ:  n_cache++;
        OP_CACHE_END:   n_end++;
        OP_RESET:       n_rst++;
        OP_DATA_OUT:    n_dout++;
        OP_SET_FEATURE: begin if (n_setf < 4) setf_vals[n_setf] = cmd.feat; n_setf++; end
        default: ;
      endcase
    end
    if (rpt_q_valid) begin
      n_query++;
      if (rpt_q_pec !== req_pec || rpt_q_ret !== req_ret) begin
        failures++; $display("FAIL table query carries wrong PEC/age");
      end
    end
    if (ecc_done && !ecc_ok && !seen_fail) begin seen_fail = 1'b1; t_first_fail = cyc; end
    if (resp_valid) begin
      got_resp = 1'b1; t_resp = cyc; r_ok = resp_ok; r_fb = resp_fallback; r_steps = resp_steps;
    end
  end

  function automatic longint cy(longint ns);
    return (ns * CPU + 999) / 1000;
  endfunction
  function automatic longint tr(int page, longint tpre);
    return cy(((page % 3 == 1) ? 3 : 2) * (tpre + 5000 + 10000));
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_read(string name, int page, bit pr2, bit ar2, int need, int minp,
                          bit hit, int ttab, bit exp_ok, int exp_steps, bit exp_fb);
    longint n, trd, trr, t_dma, t_ecc, t_set, expect_t, meas, slack;
    n_page = 0; n_cache = 0; n_end = 0; n_rst = 0; n_setf = 0; n_dout = 0; n_query = 0;
    seen_fail = 1'b0; got_resp = 1'b0;
    need_rr = need; min_tpre = TPRE_W'(minp);
    tab_hit = hit; tab_tpre = TPRE_W'(ttab);
    @(negedge clk);
    cfg_pr2_en = pr2; cfg_ar2_en = ar2;
    req_page = PAGE_W'(page); req_pec = 16'd700; req_ret = 16'd100;
    req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    t_req = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    while (!got_resp) @(negedge clk);
    while (!req_ready) @(negedge clk);   // let RESET / restore finish
    repeat (3) @(negedge clk);

    check(r_ok == exp_ok, $sformatf("%s: ok=%b", name, r_ok));
    check(int'(r_steps) == exp_steps, $sformatf("%s: steps=%0d expected %0d", name, r_steps, exp_steps));
    check(r_fb == exp_fb, $sformatf("%s: fallback=%b", name, r_fb));
    check(!proto_err, $sformatf("%s: die protocol error", name));
    check(tpre_now == DEFAULT_TPRE_NS, $sformatf("%s: tPRE left at %0d", name, tpre_now));

    // latency against the closed forms (only for successful reads)
    n     = exp_steps;
    trd   = tr(page, 24000);
    trr   = (ar2 && hit) ? tr(page, ttab) : trd;
    t_dma = cy(16000); t_ecc = cy(20000);
    t_set = (ar2 && hit) ? cy(1000) : 0;
    if (exp_ok && !exp_fb) begin
      if (n == 0) begin
        expect_t = trd + t_dma + t_ecc;
        meas = t_resp - t_req;
      end else begin
        expect_t = pr2 ? (t_set + n * trr + t_dma + t_ecc) : (t_set + n * (trr + t_dma + t_ecc));
        meas = t_resp - t_first_fail;
      end
      slack = 6 * (n + 2);
      check(meas >= expect_t && meas <= expect_t + slack,
            $sformatf("%s: tRETRY %0d cycles, closed form %0d (+%0d)", name, meas, expect_t, slack));
      $display("%-14s N_RR=%0d  measured %0d cycles, closed form %0d", name, n, meas, expect_t);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // no retry
    run_read("no-retry", 4, 1, 1, 0, 0, 1, 14000, 1, 0, 0);
    check(n_page == 1 && n_cache == 0 && n_setf == 0 && n_rst == 0 && n_query == 0,
          "no-retry: only one PAGE READ expected");

    // regular read-retry
    run_read("regular", 3, 0, 0, 5, 0, 1, 14000, 1, 5, 0);
    check(n_page == 6 && n_cache == 0 && n_rst == 0 && n_setf == 0 && n_dout == 6,
          $sformatf("regular: commands page=%0d cache=%0d rst=%0d setf=%0d", n_page, n_cache, n_rst, n_setf));

    // PR2 only
    run_read("PR2", 3, 1, 0, 5, 0, 1, 14000, 1, 5, 0);
    check(n_page == 2 && n_cache == 5 && n_rst == 1 && n_setf == 0 && n_dout == 6,
          $sformatf("PR2: commands page=%0d cache=%0d rst=%0d setf=%0d", n_page, n_cache, n_rst, n_setf));

    // AR2 only
    run_read("AR2", 3, 0, 1, 5, 0, 1, 14000, 1, 5, 0);
    check(n_page == 6 && n_cache == 0 && n_rst == 0 && n_setf == 2 && n_query == 1,
          $sformatf("AR2: commands page=%0d setf=%0d query=%0d", n_page, n_setf, n_query));
    check(setf_vals[0] == 32'd14000 && setf_vals[1] == DEFAULT_TPRE_NS, "AR2: SET FEATURE values");

    // PnAR2, several pages and step counts
    for (int k = 0; k < 6; k++) begin
      int nn, pg;
      nn = 1 + k * 3; pg = 10 + k;
      run_read("PnAR2", pg, 1, 1, nn, 0, 1, 14000 + k * 1000, 1, nn, 0);
      check(n_page == 2 && n_cache == nn && n_rst == 1 && n_setf == 2,
            $sformatf("PnAR2: commands page=%0d cache=%0d rst=%0d setf=%0d", n_page, n_cache, n_rst, n_setf));
      check(setf_vals[0] == TPRE_W'(14000 + k * 1000) && setf_vals[1] == DEFAULT_TPRE_NS,
            "PnAR2: SET FEATURE values");
    end

    // PnAR2 with the success at the last voltage set: end of cache read
    run_read("PnAR2-last", 7, 1, 1, MAXR, 0, 1, 16000, 1, MAXR, 0);
    check(n_end == 1 && n_rst == 0 && n_cache == MAXR - 1,
          $sformatf("PnAR2-last: end=%0d rst=%0d cache=%0d", n_end, n_rst, n_cache));

    // table miss: no SET FEATURE
    run_read("AR2-miss", 5, 1, 1, 4, 0, 0, 24000, 1, 4, 0);
    check(n_setf == 0 && n_query == 1, $sformatf("AR2-miss: setf=%0d", n_setf));

    // reduced tPRE too short for this page: fallback at the default tPRE
    run_read("fallback", 8, 1, 1, 3, 20000, 1, 14000, 1, 3, 1);
    check(n_setf == 2 && setf_vals[0] == 32'd14000 && setf_vals[1] == DEFAULT_TPRE_NS,
          $sformatf("fallback: setf=%0d", n_setf));
    check(n_page == 3, $sformatf("fallback: page reads=%0d", n_page));

    // unreadable page: every voltage set fails twice
    run_read("unreadable", 9, 1, 1, 40, 0, 1, 15000, 1'b0, MAXR, 1);
    check(n_dout == 1 + 2 * MAXR, $sformatf("unreadable: data outputs=%0d", n_dout));

    // regular, unreadable without AR2: no fallback
    run_read("unreadable-rg", 9, 0, 0, 40, 0, 1, 15000, 1'b0, MAXR, 0);

    check(n_aborted == 9, $sformatf("speculative steps aborted by RESET: %0d", n_aborted));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
