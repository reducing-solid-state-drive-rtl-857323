// nand_chip_model: behavioural timing model of one 3D TLC NAND flash die, for
// simulation only (not synthesizable logic; the real part is an unchanged
// commercial chip with analog sensing circuitry).
//
// It executes the commands of rr_pkg::flash_op_e with the latencies of the
// paper's Table 1: tR = N_SENSE x (tPRE + tEVAL + tDISCH) with N_SENSE = 2, 3,
// 2 for LSB, CSB and MSB pages (page address mod 3 = 0, 1, 2 here), tEVAL =
// 5 us, tDISCH = 10 us, tDMA = 16 us for a 16-KiB page, tSET = 1 us, tRST =
// 5 us. tPRE starts at 24 us and is changed by SET FEATURE.
//
// Page buffer: a data register filled by sensing and a cache register read
// by data output. PAGE READ senses and then copies to the cache register;
// CACHE READ copies data -> cache and starts sensing the next read; the
// end-of-cache-read command only copies. Each register keeps the retry step
// and tPRE it was sensed with, which data output presents on out_step and
// out_tpre so that the ECC model can decide the decode result. RESET aborts
// an ongoing sensing (no sense_done follows). Data output of page RPT_PAGE
// also streams the RPT_WORDS words of rpt_image on rdata, one per cycle.
// Commands the die cannot take yet are held off with cmd_ready; commands that
// break the read protocol set proto_err.
module nand_chip_model
  import rr_pkg::*;
#(
  parameter int CYC_PER_US = 1,
  parameter int TEVAL_NS   = 5000,
  parameter int TDISCH_NS  = 10000,
  parameter int TDMA_NS    = 16000,
  parameter int TSET_NS    = 1000,
  parameter int TRST_NS    = 5000,
  parameter int RPT_PAGE   = 0,
  parameter int RPT_WORDS  = 36
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  flash_cmd_t  cmd,
  output logic        sense_done,
  output logic        dma_done,
  output logic        op_done,
  output logic        rdata_valid,
  output logic [31:0] rdata,
  output logic [STEP_W-1:0] out_step,
  output logic [TPRE_W-1:0] out_tpre,
  output logic [TPRE_W-1:0] tpre_now,
  input  logic [31:0] rpt_image [RPT_WORDS],
  output logic        proto_err,
  output int          n_aborted
);

  function automatic int cyc(input longint ns);
    return int'((ns * CYC_PER_US + 999) / 1000);
  endfunction

  function automatic int t_r(input logic [PAGE_W-1:0] page, input logic [TPRE_W-1:0] tpre);
    int n_sense;
    n_sense = (page % 3 == 1) ? 3 : 2;
    return cyc(longint'(n_sense) * (longint'(tpre) + TEVAL_NS + TDISCH_NS));
  endfunction

  int                arr_cnt, io_cnt, op_cnt, rd_idx;
  logic              arr_busy, io_busy, op_busy;
  logic              arr_page_read;          // sensing started by PAGE READ
  logic              data_ok, cache_ok;      // registers hold sensed data
  logic [STEP_W-1:0] sens_step, data_step, cache_step;
  logic [TPRE_W-1:0] sens_tpre, data_tpre, cache_tpre;
  logic [PAGE_W-1:0] cache_page;

  assign arr_busy = arr_cnt > 0;
  assign io_busy  = io_cnt > 0;
  assign op_busy  = op_cnt > 0;

  always_comb begin
    unique case (cmd.op)
      OP_PAGE_READ, OP_CACHE_READ, OP_CACHE_END: cmd_ready = !arr_busy && !io_busy && !op_busy;
      OP_DATA_OUT:    cmd_ready = !io_busy && !op_busy;
      OP_SET_FEATURE: cmd_ready = !arr_busy && !io_busy && !op_busy;
      OP_RESET:       cmd_ready = !op_busy;
      default:        cmd_ready = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arr_cnt <= 0; io_cnt <= 0; op_cnt <= 0; rd_idx <= 0;
      arr_page_read <= 1'b0; data_ok <= 1'b0; cache_ok <= 1'b0;
      sens_step <= '0; data_step <= '0; cache_step <= '0;
      sens_tpre <= '0; data_tpre <= '0; cache_tpre <= '0; cache_page <= '0;
      sense_done <= 1'b0; dma_done <= 1'b0; op_done <= 1'b0;
      rdata_valid <= 1'b0; rdata <= '0; out_step <= '0; out_tpre <= '0;
      tpre_now <= DEFAULT_TPRE_NS; proto_err <= 1'b0; n_aborted <= 0;
    end else begin
      sense_done  <= 1'b0;
      dma_done    <= 1'b0;
      op_done     <= 1'b0;
      rdata_valid <= 1'b0;
      // array (sensing)
      if (arr_cnt == 1) begin
        sense_done <= 1'b1;
        data_ok    <= 1'b1;
        data_step  <= sens_step;
        data_tpre  <= sens_tpre;
        if (arr_page_read) begin
          cache_ok   <= 1'b1;
          cache_step <= sens_step;
          cache_tpre <= sens_tpre;
        end
      end
      if (arr_cnt > 0) arr_cnt <= arr_cnt - 1;
      // I/O (data output)
      if (io_cnt > 0) begin
        io_cnt <= io_cnt - 1;
        if (cache_page == PAGE_W'(RPT_PAGE) && rd_idx < RPT_WORDS) begin
          rdata_valid <= 1'b1;
          rdata       <= rpt_image[rd_idx];
          rd_idx      <= rd_idx + 1;
        end
        if (io_cnt == 1) begin
          dma_done <= 1'b1;
          out_step <= cache_step;
          out_tpre <= cache_tpre;
        end
      end
      // SET FEATURE / RESET
      if (op_cnt > 0) begin
        op_cnt <= op_cnt - 1;
        if (op_cnt == 1) op_done <= 1'b1;
      end
      // new command
      if (cmd_valid && cmd_ready) begin
        unique case (cmd.op)
          OP_PAGE_READ: begin
            arr_cnt <= t_r(cmd.page, tpre_now);
            arr_page_read <= 1'b1;
            sens_step <= cmd.step; sens_tpre <= tpre_now;
            data_ok <= 1'b0; cache_ok <= 1'b0; cache_page <= cmd.page;
          end
          OP_CACHE_READ: begin
            if (!data_ok) proto_err <= 1'b1;
            cache_ok <= data_ok; cache_step <= data_step; cache_tpre <= data_tpre;
            cache_page <= cmd.page;
            arr_cnt <= t_r(cmd.page, tpre_now);
            arr_page_read <= 1'b0;
            sens_step <= cmd.step; sens_tpre <= tpre_now;
            data_ok <= 1'b0;
          end
          OP_CACHE_END: begin
            if (!data_ok) proto_err <= 1'b1;
            cache_ok <= data_ok; cache_step <= data_step; cache_tpre <= data_tpre;
          end
          OP_DATA_OUT: begin
            if (!cache_ok) proto_err <= 1'b1;
            io_cnt <= cyc(TDMA_NS);
            rd_idx <= 0;
          end
          OP_SET_FEATURE: begin
            tpre_now <= cmd.feat;
            op_cnt   <= cyc(TSET_NS);
          end
          OP_RESET: begin
            if (arr_busy) n_aborted <= n_aborted + 1;
            arr_cnt <= 0; io_cnt <= 0;
            data_ok <= 1'b0;
            op_cnt  <= cyc(TRST_NS);
          end
          default: proto_err <= 1'b1;
        endcase
      end
    end
  end

endmodule
