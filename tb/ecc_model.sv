// ecc_model: behavioural model of the channel's ECC decoder, for simulation
// only. The real engine (BCH or LDPC, 72 bit errors per 1-KiB codeword) is
// not part of this design.
//
// A decode started by start finishes tECC = 20 us later with done and ok.
// Instead of bits, the model decides from the page's metadata: the page
// decodes when the retry step it was read with is at least need_rr (the
// number of retry steps this page needs) and the tPRE it was sensed with is
// at least min_tpre (the shortest precharge time at which its final retry
// step still stays within the ECC capability).
module ecc_model
  import rr_pkg::*;
#(
  parameter int CYC_PER_US = 1,
  parameter int TECC_NS    = 20000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [STEP_W-1:0] in_step,
  input  logic [TPRE_W-1:0] in_tpre,
  input  int                need_rr,
  input  logic [TPRE_W-1:0] min_tpre,
  output logic              done,
  output logic              ok
);
  localparam int TECC = (TECC_NS * CYC_PER_US + 999) / 1000;
  int   cnt;
  logic res;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= 0; res <= 1'b0; done <= 1'b0; ok <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cnt <= TECC;
        res <= (int'(in_step) >= need_rr) && (in_tpre >= min_tpre);
      end else if (cnt > 0) begin
        cnt <= cnt - 1;
        if (cnt == 1) begin done <= 1'b1; ok <= res; end
      end
    end
  end
endmodule
