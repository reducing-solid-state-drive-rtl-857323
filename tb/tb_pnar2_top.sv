// tb_pnar2_top: end-to-end test of the read-retry engine at its default
// parameters (31 voltage sets, 6 x 6 table, bins of 250 P/E cycles and 60
// days, table in page 0).
//
// A behavioural die and ECC decoder surround the engine (10 cycles per
// microsecond). The die's page 0 holds the table image: tPRE = 14 us +
// 0.4 us x PEC bin + 0.4 us x age bin, which reproduces the four entries
// printed in the paper's Figure 13 (14, 16, 16, 18 us at the corners) and
// fills the elided rows linearly. After the boot fill, a stream of reads is
// issued with P/E-cycle counts, retention ages and retry-step needs drawn
// roughly like the paper's characterization (more retry steps for older and
// more-cycled blocks), plus directed cases. For every read the test checks
// the response against an independent prediction, the SET FEATURE values
// (which proves the table was filled from flash), the die's final tPRE, and,
// for PnAR2 reads, the closed form tSET + N x tR' + tDMA + tECC.
// Every mechanism must occur at least once: boot fill, read without retry,
// pipelined step (CACHE READ), RESET of the speculative step, end of cache
// read at the last voltage set, reduced tPRE, table miss, fallback to the
// default tPRE, uncorrectable page, and the regular read-retry mode.
module tb_pnar2_top;
  import rr_pkg::*;

  localparam int CPU = 10;
  localparam int MAXR = 31;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_pr2_en = 1'b1, cfg_ar2_en = 1'b1;
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

  function automatic logic [TPRE_W-1:0] tab(int pbin, int rbin);
    return TPRE_W'(14000 + 400 * pbin + 400 * rbin);
  endfunction
  initial for (int i = 0; i < 36; i++) rpt_image[i] = tab(i / 6, i % 6);

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

  // ---------------------------------------------------------------------
  // monitor
  // ---------------------------------------------------------------------
  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_page, n_cache, n_end, n_rst, n_setf, n_reads;
  logic [TPRE_W-1:0] setf_first;
  longint t_first_fail, t_resp;
  logic seen_fail, got_resp, r_ok, r_fb;
  logic [STEP_W-1:0] r_steps;
  // mechanism counters
  int m_boot = 0, m_noretry = 0, m_pipe = 0, m_reset = 0, m_end = 0, m_reduce = 0;
  int m_miss = 0, m_fallback = 0, m_uncorr = 0, m_regular = 0;
  longint sum_retry_cyc = 0; int n_retry_reads = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (boot_done && fl_cmd_valid && fl_cmd_ready) begin
      unique case (fl_cmd.op)
        OP_PAGE_READ:   n_page++;
        OP_CACHE_READ:  n_cache++;
        OP_CACHE_END:   n_end++;
        OP_RESET:       n_rst++;
        OP_SET_FEATURE: begin if (n_setf == 0) setf_first = fl_cmd.feat; n_setf++; end
        default: ;
      endcase
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

  // One read; the expected outcome is predicted from the table formula.
  task automatic do_read(int page, int pec, int ret, int need, int minp, bit pr2, bit ar2);
    bit hit, reduced, e_ok, e_fb;
    int e_steps;
    logic [TPRE_W-1:0] tp;
    longint meas, expect_t;
    hit     = (pec < 1500) && (ret < 360);
    tp      = hit ? tab(pec / 250, ret / 60) : DEFAULT_TPRE_NS;
    reduced = ar2 && hit && need > 0;
    if (need == 0) begin
      e_ok = 1; e_steps = 0; e_fb = 0;
    end else if (need > MAXR) begin
      e_ok = 0; e_steps = MAXR; e_fb = reduced;
    end else if (reduced && minp > int'(tp)) begin
      e_ok = 1; e_steps = need; e_fb = 1;
    end else begin
      e_ok = 1; e_steps = need; e_fb = 0;
    end

    n_page = 0; n_cache = 0; n_end = 0; n_rst = 0; n_setf = 0;
    seen_fail = 1'b0; got_resp = 1'b0;
    need_rr = need; min_tpre = TPRE_W'(minp);
    @(negedge clk);
    cfg_pr2_en = pr2; cfg_ar2_en = ar2;
    req_page = PAGE_W'(page); req_pec = PEC_W'(pec); req_ret = RET_W'(ret);
    req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    while (!got_resp) @(negedge clk);
    while (!req_ready) @(negedge clk);
    n_reads++;

    check(r_ok == e_ok && int'(r_steps) == e_steps && r_fb == e_fb,
          $sformatf("read page=%0d pec=%0d ret=%0d need=%0d: got ok=%b steps=%0d fb=%b, expected %b %0d %b",
                    page, pec, ret, need, r_ok, r_steps, r_fb, e_ok, e_steps, e_fb));
    check(tpre_now == DEFAULT_TPRE_NS && !proto_err, "die left at the default tPRE without protocol error");
    if (reduced) check(n_setf == 2 && setf_first == tp,
                       $sformatf("SET FEATURE %0d times, first %0d, table says %0d", n_setf, setf_first, tp));
    else         check(n_setf == 0, "no SET FEATURE without a reduced tPRE");

    // closed form for PnAR2 reads that succeed without fallback
    if (pr2 && ar2 && e_ok && !e_fb && need > 0) begin
      expect_t = (reduced ? cy(1000) : 0) + need * tr(page, tp) + cy(16000) + cy(20000);
      meas = t_resp - t_first_fail;
      check(meas >= expect_t && meas <= expect_t + 6 * (need + 2),
            $sformatf("tRETRY %0d cycles, closed form %0d", meas, expect_t));
      sum_retry_cyc += meas; n_retry_reads++;
    end

    // mechanism bookkeeping
    if (need == 0 && e_ok) m_noretry++;
    m_pipe   += n_cache;
    m_reset  += n_rst;
    m_end    += n_end;
    if (reduced) m_reduce++;
    if (ar2 && !hit && need > 0) m_miss++;
    if (r_fb) m_fallback++;
    if (!r_ok) m_uncorr++;
    if (!pr2 && !ar2 && need > 0) m_regular++;
  endtask

  // retry-step need roughly following the characterization: grows with
  // retention age and P/E cycles
  function automatic int draw_need(int pec, int ret);
    int base;
    if (ret < 30) base = (pec >= 1000) ? 1 : 0;
    else base = 4 + ret / 40 + pec / 200;
    if (base > 24) base = 24;
    return base + int'($urandom_range(0, 3));
  endfunction

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pec, ret, need, page, tpv;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (boot_done);
    m_boot++;
    check(!req_ready || boot_done, "requests held off during boot");

    // directed cases
    do_read(12, 0, 10, 0, 0, 1, 1);              // fresh page: no retry
    do_read(13, 600, 100, 8, 10000, 1, 1);       // PnAR2, reduced tPRE
    do_read(14, 1200, 300, 20, 10000, 1, 1);     // worst case in table
    do_read(15, 2000, 365, 19, 10000, 1, 1);     // outside the table: miss
    do_read(16, 300, 200, 6, 23000, 1, 1);       // outlier page: fallback
    do_read(17, 900, 330, MAXR, 10000, 1, 1);    // succeeds at the last set
    do_read(18, 1400, 350, 40, 10000, 1, 1);     // uncorrectable
    do_read(19, 700, 120, 7, 10000, 0, 0);       // regular read-retry mode

    // random stream at the main configuration
    for (int k = 0; k < 60; k++) begin
      pec  = int'($urandom_range(0, 1800));
      ret  = int'($urandom_range(0, 380));
      need = draw_need(pec, ret);
      page = 100 + k;
      tpv  = ((k % 17) == 5) ? 24000 : 9000 + int'($urandom_range(0, 4000));
      do_read(page, pec, ret, need, tpv, 1, 1);
    end

    $display("reads %0d, PnAR2 retry reads %0d, mean tRETRY %0d cycles",
             n_reads, n_retry_reads, n_retry_reads > 0 ? sum_retry_cyc / n_retry_reads : 0);
    $display("mechanisms: boot=%0d noretry=%0d cache_read=%0d reset=%0d cache_end=%0d reduced=%0d miss=%0d fallback=%0d uncorrectable=%0d regular=%0d",
             m_boot, m_noretry, m_pipe, m_reset, m_end, m_reduce, m_miss, m_fallback, m_uncorr, m_regular);
    check(m_boot > 0, "boot fill never happened");
    check(m_noretry > 0, "no read without retry");
    check(m_pipe > 0, "no pipelined retry step");
    check(m_reset > 0, "no RESET of a speculative step");
    check(m_end > 0, "no end of cache read");
    check(m_reduce > 0, "no reduced tPRE");
    check(m_miss > 0, "no table miss");
    check(m_fallback > 0, "no fallback to the default tPRE");
    check(m_uncorr > 0, "no uncorrectable page");
    check(m_regular > 0, "no regular read-retry");
    check(n_aborted == m_reset, "every RESET aborted a speculative sensing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
