// rpt: Read-timing Parameter Table (RPT).
//
// Holds, for one flash die, the precharge time tPRE that was profiled offline
// as safe for each combination of P/E-cycle count (PEC) and retention age.
// The controller queries it once per read-retry operation with the PEC and
// retention age of the block that failed ECC; the answer is the tPRE to set
// with SET FEATURE before the retry steps start.
//
// Organisation. N_PEC_BINS x N_RET_BINS entries of TPRE_W bits, indexed by
// pec_bin * N_RET_BINS + ret_bin. A PEC below k*PEC_BIN falls in bin k-1,
// and likewise for retention age in days with RET_BIN. The defaults (6 PEC
// bins of 250 cycles up to 1.5K, 6 retention bins of 60 days up to 360 days,
// 36 entries of 4 bytes = 144 bytes) follow the table drawn in the paper's
// Figure 13 (rows "< 250" ... "< 1.5K", "< 60" ... "< 360" days) and its
// 144-byte estimate for 36 combinations; the equal bin widths between the
// printed rows are this design's reading of the elided rows.
// A block outside the profiled range (PEC >= 1.5K or age >= 360 days) is a
// miss: q_hit is 0 and q_tpre is the default tPRE, so no reduction is
// applied. That rule is this design's choice.
//
// Interface and timing. Writes (w_en/w_addr/w_data) take effect at the next
// clock edge; they come from the boot loader. A query (q_valid with q_pec and
// q_ret) is answered one cycle later on r_valid/r_hit/r_tpre. After reset
// every entry holds the default tPRE of 24 us, so an unloaded table never
// shortens a read.
module rpt
  import rr_pkg::*;
#(
  parameter int unsigned N_PEC_BINS = 6,
  parameter int unsigned N_RET_BINS = 6,
  parameter int unsigned PEC_BIN    = 250,
  parameter int unsigned RET_BIN    = 60,
  parameter logic [TPRE_W-1:0] TPRE_DEFAULT = DEFAULT_TPRE_NS,
  localparam int unsigned N_ENTRIES = N_PEC_BINS * N_RET_BINS,
  localparam int unsigned ADDR_W    = $clog2(N_ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write port (boot-time fill)
  input  logic              w_en,
  input  logic [ADDR_W-1:0] w_addr,
  input  logic [TPRE_W-1:0] w_data,
  // query port
  input  logic              q_valid,
  input  logic [PEC_W-1:0]  q_pec,
  input  logic [RET_W-1:0]  q_ret,
  output logic              r_valid,
  output logic              r_hit,
  output logic [TPRE_W-1:0] r_tpre
);

  logic [TPRE_W-1:0] table_q [N_ENTRIES];

  // Bin of each coordinate: the number of bin boundaries at or below it.
  logic [ADDR_W-1:0] pec_bin, ret_bin, q_idx;
  logic              in_range;

  always_comb begin
    pec_bin = '0;
    ret_bin = '0;
    for (int unsigned k = 1; k < N_PEC_BINS; k++)
      if (32'(q_pec) >= k * PEC_BIN) pec_bin = ADDR_W'(k);
    for (int unsigned k = 1; k < N_RET_BINS; k++)
      if (32'(q_ret) >= k * RET_BIN) ret_bin = ADDR_W'(k);
    in_range = (32'(q_pec) < N_PEC_BINS * PEC_BIN) && (32'(q_ret) < N_RET_BINS * RET_BIN);
    q_idx    = ADDR_W'(32'(pec_bin) * N_RET_BINS + 32'(ret_bin));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_ENTRIES; i++) table_q[i] <= TPRE_DEFAULT;
    end else if (w_en && 32'(w_addr) < N_ENTRIES) begin
      table_q[w_addr] <= w_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0;
      r_hit   <= 1'b0;
      r_tpre  <= TPRE_DEFAULT;
    end else begin
      r_valid <= q_valid;
      if (q_valid) begin
        r_hit  <= in_range;
        r_tpre <= in_range ? table_q[q_idx] : TPRE_DEFAULT;
      end
    end
  end

endmodule
