// tb_rpt_loader: self-checking test of the boot-time table fill.
//
// The loader reads the table page of the behavioural die, whose image holds
// random words. The test checks that exactly 36 writes arrive, in address
// order, with the image's words; that the loader issued one PAGE READ and
// one data output of the table page; and that done rises after tR + tDMA of
// that page (2 x (24 + 5 + 10) us + 16 us at 10 cycles per microsecond),
// within a few cycles, and then stays high with no more commands.
module tb_rpt_loader;
  import rr_pkg::*;

  localparam int CPU = 10;
  localparam int RPT_PAGE = 6;   // an LSB page: N_SENSE = 2

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  flash_cmd_t cmd;
  logic sense_done, dma_done, op_done, rdata_valid;
  logic [31:0] rdata;
  logic [STEP_W-1:0] out_step;
  logic [TPRE_W-1:0] out_tpre, tpre_now;
  logic [31:0] rpt_image [36];
  logic proto_err;
  int n_aborted;
  logic w_en, done;
  logic [5:0] w_addr;
  logic [TPRE_W-1:0] w_data;

  int checks = 0, failures = 0;
  int n_wr = 0, n_page = 0, n_dout = 0, n_other = 0;
  longint cyc = 0, t_done = -1;

  initial for (int i = 0; i < 36; i++) rpt_image[i] = $urandom;

  rpt_loader #(.RPT_PAGE(PAGE_W'(RPT_PAGE))) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .fl_sense_done(sense_done), .fl_dma_done(dma_done),
    .rdata_valid, .rdata, .w_en, .w_addr, .w_data, .done
  );

  nand_chip_model #(.CYC_PER_US(CPU), .RPT_PAGE(RPT_PAGE)) u_die (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .sense_done, .dma_done, .op_done,
    .rdata_valid, .rdata, .out_step, .out_tpre, .tpre_now, .rpt_image,
    .proto_err, .n_aborted
  );

  always_ff @(posedge clk) begin
    if (rst_n) cyc <= cyc + 1;
    if (w_en) begin
      checks++;
      if (int'(w_addr) != n_wr || w_data !== rpt_image[n_wr]) begin
        failures++;
        $display("FAIL write %0d: addr %0d data %h", n_wr, w_addr, w_data);
      end
      n_wr++;
    end
    if (rst_n && cmd_valid && cmd_ready) begin
      if (cmd.op == OP_PAGE_READ && int'(cmd.page) == RPT_PAGE) n_page++;
      else if (cmd.op == OP_DATA_OUT) n_dout++;
      else n_other++;
    end
    if (done && t_done < 0) t_done = cyc;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expect_t;
    repeat (3) @(posedge clk);
    checks++;
    if (done) begin failures++; $display("FAIL done during reset"); end
    rst_n = 1'b1;
    wait (done);
    repeat (200) @(posedge clk);
    expect_t = 2 * (24 + 5 + 10) * CPU + 16 * CPU;
    checks++; if (n_wr != 36) begin failures++; $display("FAIL %0d writes", n_wr); end
    checks++; if (n_page != 1 || n_dout != 1 || n_other != 0) begin
      failures++; $display("FAIL commands: page %0d dout %0d other %0d", n_page, n_dout, n_other);
    end
    checks++; if (t_done < expect_t || t_done > expect_t + 8) begin
      failures++; $display("FAIL done at %0d cycles, expected %0d", t_done, expect_t);
    end
    checks++; if (!done || proto_err) begin failures++; $display("FAIL done dropped or protocol error"); end
    $display("boot fill took %0d cycles (tR + tDMA = %0d)", t_done, expect_t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
