// read_retry_ctrl: pipelined and adaptive read-retry sequencer for one die.
//
// A page read starts as a regular PAGE READ with the read-reference voltage
// set 0 (step 0), followed by data output and ECC decoding. If ECC fails, a
// read-retry operation reads the same page again with voltage sets 1, 2, ...
// until ECC succeeds or all MAX_RR sets have been tried. Two mechanisms
// shorten that operation:
//
//  * Pipelined read-retry (PR2, cfg_pr2_en). As soon as the sensing of retry
//    step i is finished, the sequencer issues CACHE READ for step i+1. The
//    die moves step i's data to its cache register and starts sensing step
//    i+1 while step i's data is transferred out and decoded. Sensing is
//    therefore the only per-step cost, and tRETRY ~ N_RR*tR + tDMA + tECC.
//    When ECC of step i succeeds the page is returned at once and a RESET
//    aborts the speculative step i+1. The first retry step is started with
//    PAGE READ, the last possible one (MAX_RR) is closed with the end-of-
//    cache-read command, which copies the data to the cache register
//    without starting another sensing.
//  * Adaptive read-retry (AR2, cfg_ar2_en). On the first ECC failure the
//    sequencer queries the read-timing parameter table with the block's P/E
//    cycles and retention age, issues one SET FEATURE with the returned tPRE,
//    runs every retry step with it, and restores the default tPRE with a
//    second SET FEATURE after the operation (after the RESET, if any). If the
//    table has no entry for the block, the retry runs at the default tPRE.
//    If all retry steps fail with a reduced tPRE, the tPRE is restored and
//    the whole retry operation is repeated once at the default tPRE
//    (resp_fallback), since it might have succeeded with the default.
//
// With both enables low the sequencer performs the regular read-retry (one
// PAGE READ, data output and ECC decode per step, in series).
//
// The command sequence and the four AR2 steps follow the paper's Figures 12
// and 13 and Section 6; the handshakes, the completion pulses of the die and
// the end-of-cache-read command are this design's choices.
//
// Interface and timing.
//  * Request: req_valid/req_ready with page, PEC and retention age (days).
//    req_ready is high only in the idle state.
//  * Response: a one-cycle resp_valid pulse with resp_ok (page decoded),
//    resp_steps (retry steps used, 0 = no retry) and resp_fallback. It is
//    raised in the cycle after ECC reports success, before the RESET and the
//    tPRE restore, which the sequencer then completes before taking the next
//    request.
//  * Table query: rpt_q_valid pulse, answer on rpt_r_valid any later cycle.
//  * Die: cmd_valid/cmd_ready carries one flash_cmd_t; cmd is held stable
//    while cmd_valid is high and cmd_ready low. fl_sense_done pulses when a
//    PAGE READ or CACHE READ finished sensing, fl_dma_done when a data output
//    finished, fl_op_done when SET FEATURE or RESET finished.
//  * ECC engine: ecc_start pulses after each data output, ecc_done/ecc_ok
//    report the decode result of that page.
module read_retry_ctrl
  import rr_pkg::*;
#(
  parameter int unsigned MAX_RR = 31,
  parameter logic [TPRE_W-1:0] TPRE_DEFAULT = DEFAULT_TPRE_NS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_pr2_en,
  input  logic              cfg_ar2_en,
  // host side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PAGE_W-1:0] req_page,
  input  logic [PEC_W-1:0]  req_pec,
  input  logic [RET_W-1:0]  req_ret,
  output logic              resp_valid,
  output logic              resp_ok,
  output logic [STEP_W-1:0] resp_steps,
  output logic              resp_fallback,
  // read-timing parameter table
  output logic              rpt_q_valid,
  output logic [PEC_W-1:0]  rpt_q_pec,
  output logic [RET_W-1:0]  rpt_q_ret,
  input  logic              rpt_r_valid,
  input  logic              rpt_r_hit,
  input  logic [TPRE_W-1:0] rpt_r_tpre,
  // flash die
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output flash_cmd_t        cmd,
  input  logic              fl_sense_done,
  input  logic              fl_dma_done,
  input  logic              fl_op_done,
  // ECC engine
  output logic              ecc_start,
  input  logic              ecc_done,
  input  logic              ecc_ok
);

  typedef enum logic [3:0] {
    S_IDLE,       // wait for a request
    S_READ_CMD,   // issue PAGE READ for the current step
    S_WAIT_SENSE, // wait until the current step has been sensed
    S_CACHE_CMD,  // PR2: issue CACHE READ for the next step
    S_END_CMD,    // PR2: last step, issue end of cache read
    S_DOUT_CMD,   // issue data output
    S_WAIT_DMA,   // wait for the data transfer to finish
    S_WAIT_ECC,   // wait for the ECC decode result
    S_RPT_QUERY,  // AR2: query the table
    S_RPT_WAIT,   // AR2: wait for the table
    S_SETF_CMD,   // AR2: issue SET FEATURE (reduced or default tPRE)
    S_RST_CMD,    // PR2: issue RESET to abort the speculative step
    S_WAIT_OP,    // wait for SET FEATURE / RESET to finish
    S_CLEANUP     // decide whether the default tPRE must be restored
  } state_e;

  state_e            state_q, after_op_q;
  logic [PAGE_W-1:0] page_q;
  logic [PEC_W-1:0]  pec_q;
  logic [RET_W-1:0]  ret_q;
  logic [STEP_W-1:0] step_q;        // step whose data is sensed / decoded
  logic              sensed_q;      // sensing of step_q is finished
  logic              spec_q;        // step_q+1 is being sensed (PR2)
  logic              by_cache_q;    // step_q was started by CACHE READ
  logic              reduced_q;     // die currently runs at a reduced tPRE
  logic              fallback_q;    // retry repeated at the default tPRE
  logic              pr2_q, ar2_q;  // enables sampled per request
  logic [TPRE_W-1:0] setf_val_q;    // value of the pending SET FEATURE
  logic              setf_restore_q;// pending SET FEATURE restores the default

  logic cmd_fire;
  assign cmd_fire  = cmd_valid && cmd_ready;
  assign req_ready = (state_q == S_IDLE);

  // The next step may be started speculatively when PR2 is on, the current
  // step is a retry step and another voltage set remains.
  logic can_pipeline;
  assign can_pipeline = pr2_q && (step_q != '0) && (32'(step_q) < MAX_RR);

  // ---------------------------------------------------------------------
  // Command to the die
  // ---------------------------------------------------------------------
  always_comb begin
    cmd_valid = 1'b0;
    cmd       = '{op: OP_NOP, page: page_q, step: step_q, feat: '0};
    unique case (state_q)
      S_READ_CMD:  begin cmd_valid = 1'b1; cmd.op = OP_PAGE_READ; end
      S_CACHE_CMD: begin cmd_valid = 1'b1; cmd.op = OP_CACHE_READ; cmd.step = step_q + 1'b1; end
      S_END_CMD:   begin cmd_valid = 1'b1; cmd.op = OP_CACHE_END; end
      S_DOUT_CMD:  begin cmd_valid = 1'b1; cmd.op = OP_DATA_OUT; end
      S_SETF_CMD:  begin cmd_valid = 1'b1; cmd.op = OP_SET_FEATURE; cmd.feat = setf_val_q; end
      S_RST_CMD:   begin cmd_valid = 1'b1; cmd.op = OP_RESET; end
      default: ;
    endcase
  end

  assign rpt_q_valid = (state_q == S_RPT_QUERY);
  assign rpt_q_pec   = pec_q;
  assign rpt_q_ret   = ret_q;

  // ---------------------------------------------------------------------
  // Sequencer
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      after_op_q     <= S_IDLE;
      page_q         <= '0;
      pec_q          <= '0;
      ret_q          <= '0;
      step_q         <= '0;
      sensed_q       <= 1'b0;
      spec_q         <= 1'b0;
      by_cache_q     <= 1'b0;
      reduced_q      <= 1'b0;
      fallback_q     <= 1'b0;
      pr2_q          <= 1'b0;
      ar2_q          <= 1'b0;
      setf_val_q     <= TPRE_DEFAULT;
      setf_restore_q <= 1'b0;
      resp_valid     <= 1'b0;
      resp_ok        <= 1'b0;
      resp_steps     <= '0;
      resp_fallback  <= 1'b0;
      ecc_start      <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      ecc_start  <= 1'b0;
      if (fl_sense_done) sensed_q <= 1'b1;

      unique case (state_q)
        S_IDLE: if (req_valid) begin
          page_q     <= req_page;
          pec_q      <= req_pec;
          ret_q      <= req_ret;
          pr2_q      <= cfg_pr2_en;
          ar2_q      <= cfg_ar2_en;
          step_q     <= '0;
          spec_q     <= 1'b0;
          by_cache_q <= 1'b0;
          fallback_q <= 1'b0;
          sensed_q   <= 1'b0;
          state_q    <= S_READ_CMD;
        end

        S_READ_CMD: if (cmd_fire) begin
          sensed_q   <= 1'b0;
          by_cache_q <= 1'b0;
          state_q    <= S_WAIT_SENSE;
        end

        S_WAIT_SENSE: if (sensed_q) begin
          if (can_pipeline)    state_q <= S_CACHE_CMD;
          else if (by_cache_q) state_q <= S_END_CMD;
          else                 state_q <= S_DOUT_CMD;
        end

        S_CACHE_CMD: if (cmd_fire) begin
          sensed_q <= 1'b0;
          spec_q   <= 1'b1;
          state_q  <= S_DOUT_CMD;
        end

        S_END_CMD: if (cmd_fire) state_q <= S_DOUT_CMD;

        S_DOUT_CMD: if (cmd_fire) state_q <= S_WAIT_DMA;

        S_WAIT_DMA: if (fl_dma_done) begin
          ecc_start <= 1'b1;
          state_q   <= S_WAIT_ECC;
        end

        S_WAIT_ECC: if (ecc_done) begin
          if (ecc_ok) begin
            // Return the page now; abort the speculative step, then restore.
            resp_valid    <= 1'b1;
            resp_ok       <= 1'b1;
            resp_steps    <= step_q;
            resp_fallback <= fallback_q;
            state_q       <= spec_q ? S_RST_CMD : S_CLEANUP;
          end else if (step_q == '0) begin
            // First read failed: start the read-retry operation.
            state_q <= ar2_q ? S_RPT_QUERY : S_READ_CMD;
            step_q  <= STEP_W'(1);
          end else if (32'(step_q) < MAX_RR) begin
            step_q <= step_q + 1'b1;
            if (spec_q) begin
              // Next step is already being sensed.
              spec_q     <= 1'b0;
              by_cache_q <= 1'b1;
              state_q    <= S_WAIT_SENSE;
            end else begin
              state_q <= S_READ_CMD;
            end
          end else if (reduced_q && !fallback_q) begin
            // All steps failed at a reduced tPRE: restore it and retry again.
            fallback_q     <= 1'b1;
            setf_val_q     <= TPRE_DEFAULT;
            setf_restore_q <= 1'b1;
            step_q         <= STEP_W'(1);
            after_op_q     <= S_READ_CMD;
            state_q        <= S_SETF_CMD;
          end else begin
            resp_valid    <= 1'b1;
            resp_ok       <= 1'b0;
            resp_steps    <= step_q;
            resp_fallback <= fallback_q;
            state_q       <= S_CLEANUP;
          end
        end

        S_RPT_QUERY: state_q <= S_RPT_WAIT;

        S_RPT_WAIT: if (rpt_r_valid) begin
          if (rpt_r_hit && rpt_r_tpre != TPRE_DEFAULT) begin
            setf_val_q     <= rpt_r_tpre;
            setf_restore_q <= 1'b0;
            after_op_q     <= S_READ_CMD;
            state_q        <= S_SETF_CMD;
          end else begin
            state_q <= S_READ_CMD;
          end
        end

        S_SETF_CMD: if (cmd_fire) begin
          reduced_q <= !setf_restore_q;
          state_q   <= S_WAIT_OP;
        end

        S_RST_CMD: if (cmd_fire) begin
          spec_q     <= 1'b0;
          after_op_q <= S_CLEANUP;
          state_q    <= S_WAIT_OP;
        end

        S_WAIT_OP: if (fl_op_done) begin
          sensed_q <= 1'b0;
          state_q  <= after_op_q;
        end

        S_CLEANUP: begin
          if (reduced_q) begin
            setf_val_q     <= TPRE_DEFAULT;
            setf_restore_q <= 1'b1;
            after_op_q     <= S_IDLE;
            state_q        <= S_SETF_CMD;
          end else begin
            state_q <= S_IDLE;
          end
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // Handshake rules
  // ---------------------------------------------------------------------
  // A command is held until the die takes it.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));
  // Never more retry steps than voltage sets.
  a_step_range: assert property (@(posedge clk) disable iff (!rst_n)
    32'(step_q) <= MAX_RR);
  // The default tPRE is back whenever a new request can be taken.
  a_idle_default: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_IDLE |-> !reduced_q);

endmodule
