// pnar2_top: read-retry engine of an SSD controller for one NAND flash die,
// with pipelined (PR2) and adaptive (AR2) read-retry combined (PnAR2).
//
// Three blocks share the die's command port:
//  * rpt_loader copies the read-timing parameter table from flash page
//    RPT_PAGE into the table after reset; it owns the command port until
//    boot_done rises, and host requests are held off until then.
//  * rpt is the read-timing parameter table (best tPRE per P/E-cycle and
//    retention-age bin).
//  * read_retry_ctrl turns each host page read into PAGE READ / CACHE READ /
//    data output / ECC decode / SET FEATURE / RESET commands and returns the
//    result.
// The die and the ECC decoder are outside: their signals are ports. The
// block's P/E-cycle count and retention age come with each request from the
// firmware, which already tracks them.
//
// Timing: see read_retry_ctrl. A read that needs no retry costs tR + tDMA +
// tECC plus a few cycles; a read that needs N_RR retry steps returns about
// tSET + N_RR x tR' + tDMA + tECC after the first ECC failure, tR' being the
// sensing time at the table's tPRE.
module pnar2_top
  import rr_pkg::*;
#(
  parameter int unsigned MAX_RR     = 31,
  parameter int unsigned N_PEC_BINS = 6,
  parameter int unsigned N_RET_BINS = 6,
  parameter int unsigned PEC_BIN    = 250,
  parameter int unsigned RET_BIN    = 60,
  parameter logic [PAGE_W-1:0] RPT_PAGE = '0,
  parameter logic [TPRE_W-1:0] TPRE_DEFAULT = DEFAULT_TPRE_NS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_pr2_en,
  input  logic              cfg_ar2_en,
  output logic              boot_done,
  // host / firmware
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PAGE_W-1:0] req_page,
  input  logic [PEC_W-1:0]  req_pec,
  input  logic [RET_W-1:0]  req_ret,
  output logic              resp_valid,
  output logic              resp_ok,
  output logic [STEP_W-1:0] resp_steps,
  output logic              resp_fallback,
  // flash die
  output logic              fl_cmd_valid,
  input  logic              fl_cmd_ready,
  output flash_cmd_t        fl_cmd,
  input  logic              fl_sense_done,
  input  logic              fl_dma_done,
  input  logic              fl_op_done,
  input  logic              fl_rdata_valid,
  input  logic [31:0]       fl_rdata,
  // ECC engine
  output logic              ecc_start,
  input  logic              ecc_done,
  input  logic              ecc_ok
);

  localparam int unsigned N_ENTRIES = N_PEC_BINS * N_RET_BINS;
  localparam int unsigned ADDR_W    = $clog2(N_ENTRIES);

  logic              ld_cmd_valid, rr_cmd_valid;
  flash_cmd_t        ld_cmd, rr_cmd;
  logic              w_en;
  logic [ADDR_W-1:0] w_addr;
  logic [TPRE_W-1:0] w_data;
  logic              q_valid, r_valid, r_hit;
  logic [PEC_W-1:0]  q_pec;
  logic [RET_W-1:0]  q_ret;
  logic [TPRE_W-1:0] r_tpre;
  logic              rr_req_ready;

  rpt_loader #(.RPT_PAGE(RPT_PAGE), .N_ENTRIES(N_ENTRIES)) u_loader (
    .clk, .rst_n,
    .cmd_valid(ld_cmd_valid), .cmd_ready(fl_cmd_ready && !boot_done), .cmd(ld_cmd),
    .fl_sense_done, .fl_dma_done,
    .rdata_valid(fl_rdata_valid), .rdata(fl_rdata),
    .w_en, .w_addr, .w_data, .done(boot_done)
  );

  rpt #(
    .N_PEC_BINS(N_PEC_BINS), .N_RET_BINS(N_RET_BINS),
    .PEC_BIN(PEC_BIN), .RET_BIN(RET_BIN), .TPRE_DEFAULT(TPRE_DEFAULT)
  ) u_rpt (
    .clk, .rst_n,
    .w_en, .w_addr, .w_data,
    .q_valid, .q_pec, .q_ret,
    .r_valid, .r_hit, .r_tpre
  );

  read_retry_ctrl #(.MAX_RR(MAX_RR), .TPRE_DEFAULT(TPRE_DEFAULT)) u_ctrl (
    .clk, .rst_n, .cfg_pr2_en, .cfg_ar2_en,
    .req_valid(req_valid && boot_done), .req_ready(rr_req_ready),
    .req_page, .req_pec, .req_ret,
    .resp_valid, .resp_ok, .resp_steps, .resp_fallback,
    .rpt_q_valid(q_valid), .rpt_q_pec(q_pec), .rpt_q_ret(q_ret),
    .rpt_r_valid(r_valid), .rpt_r_hit(r_hit), .rpt_r_tpre(r_tpre),
    .cmd_valid(rr_cmd_valid), .cmd_ready(fl_cmd_ready && boot_done), .cmd(rr_cmd),
    .fl_sense_done(fl_sense_done && boot_done),
    .fl_dma_done(fl_dma_done && boot_done),
    .fl_op_done(fl_op_done && boot_done),
    .ecc_start, .ecc_done, .ecc_ok
  );

  assign req_ready    = rr_req_ready && boot_done;
  assign fl_cmd_valid = boot_done ? rr_cmd_valid : ld_cmd_valid;
  assign fl_cmd       = boot_done ? rr_cmd : ld_cmd;

endmodule
