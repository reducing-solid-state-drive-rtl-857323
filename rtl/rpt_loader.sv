// rpt_loader: fills the read-timing parameter table from flash at boot.
//
// The profiled table is kept in one page of the die (page RPT_PAGE) and is
// copied into the controller's table once after reset, before the first
// host read; this follows the paper's remark that the table is stored in a
// page of each chip and fetched into controller memory at boot time. How it
// is fetched is this design's choice: one PAGE READ of RPT_PAGE at the
// default timing, one data output, and the first N_ENTRIES 32-bit words of
// the data stream written to table entries 0, 1, 2, ... in order. The table
// page is not sent through the ECC decoder here.
//
// Interface and timing. The loader starts by itself after reset, drives the
// die's command port (cmd_valid/cmd_ready/cmd) until done, writes one entry
// per rdata_valid beat (w_en/w_addr/w_data) and raises done, which stays
// high, in the cycle after the data output finishes (fl_dma_done).
// Most bits of cmd are constant: the page is always RPT_PAGE, the step is
// voltage set 0 and the feature value is unused, so a synthesis tool ties
// them off.
module rpt_loader
  import rr_pkg::*;
#(
  parameter logic [PAGE_W-1:0] RPT_PAGE = '0,
  parameter int unsigned N_ENTRIES = 36,
  localparam int unsigned ADDR_W = $clog2(N_ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output flash_cmd_t        cmd,
  input  logic              fl_sense_done,
  input  logic              fl_dma_done,
  input  logic              rdata_valid,
  input  logic [31:0]       rdata,
  output logic              w_en,
  output logic [ADDR_W-1:0] w_addr,
  output logic [TPRE_W-1:0] w_data,
  output logic              done
);

  typedef enum logic [2:0] {L_READ, L_SENSE, L_DOUT, L_STREAM, L_DONE} lstate_e;
  lstate_e           state_q;
  logic [ADDR_W:0]   idx_q;

  always_comb begin
    cmd       = '{op: OP_NOP, page: RPT_PAGE, step: '0, feat: '0};
    cmd_valid = 1'b0;
    if (state_q == L_READ) begin cmd_valid = 1'b1; cmd.op = OP_PAGE_READ; end
    if (state_q == L_DOUT) begin cmd_valid = 1'b1; cmd.op = OP_DATA_OUT;  end
  end

  assign w_en   = (state_q == L_STREAM) && rdata_valid && (32'(idx_q) < N_ENTRIES);
  assign w_addr = idx_q[ADDR_W-1:0];
  assign w_data = rdata;
  assign done   = (state_q == L_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= L_READ;
      idx_q   <= '0;
    end else begin
      unique case (state_q)
        L_READ:   if (cmd_valid && cmd_ready) state_q <= L_SENSE;
        L_SENSE:  if (fl_sense_done) state_q <= L_DOUT;
        L_DOUT:   if (cmd_valid && cmd_ready) begin idx_q <= '0; state_q <= L_STREAM; end
        L_STREAM: begin
          if (w_en) idx_q <= idx_q + 1'b1;
          if (fl_dma_done) state_q <= L_DONE;
        end
        default:  state_q <= L_DONE;
      endcase
    end
  end

endmodule
