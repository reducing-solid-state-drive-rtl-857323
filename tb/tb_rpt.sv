// tb_rpt: self-checking test of the read-timing parameter table.
//
// Checks that every entry reads the default 24 us after reset, fills the 36
// entries with distinct values, then queries bin boundaries, random points
// and points outside the profiled range. The expected entry is computed with
// division (pec/250, ret/60), independently of the table's comparator chain.
// Also checks the one-cycle query latency.
module tb_rpt;
  import rr_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              w_en = 1'b0;
  logic [5:0]        w_addr = '0;
  logic [TPRE_W-1:0] w_data = '0;
  logic              q_valid = 1'b0;
  logic [PEC_W-1:0]  q_pec = '0;
  logic [RET_W-1:0]  q_ret = '0;
  logic              r_valid, r_hit;
  logic [TPRE_W-1:0] r_tpre;

  int checks = 0, failures = 0;

  rpt dut (.*);

  function automatic logic [TPRE_W-1:0] entry_val(int i);
    return 32'd10000 + 32'(i) * 32'd250;
  endfunction

  task automatic query(int pec, int ret);
    int exp_hit;
    logic [TPRE_W-1:0] exp_t;
    exp_hit = (pec < 1500 && ret < 360);
    exp_t   = exp_hit ? entry_val((pec / 250) * 6 + ret / 60) : DEFAULT_TPRE_NS;
    @(negedge clk);
    q_valid = 1'b1; q_pec = PEC_W'(pec); q_ret = RET_W'(ret);
    @(negedge clk);
    q_valid = 1'b0;
    checks++;
    if (!r_valid || r_hit !== 1'(exp_hit) || r_tpre !== exp_t) begin
      failures++;
      $display("FAIL query pec=%0d ret=%0d: valid=%b hit=%b tpre=%0d, expected hit=%0d tpre=%0d",
               pec, ret, r_valid, r_hit, r_tpre, exp_hit, exp_t);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // after reset: default everywhere
    for (int i = 0; i < 36; i++) begin
      @(negedge clk);
      q_valid = 1'b1; q_pec = PEC_W'((i / 6) * 250); q_ret = RET_W'((i % 6) * 60);
      @(negedge clk);
      q_valid = 1'b0;
      checks++;
      if (r_tpre !== DEFAULT_TPRE_NS || !r_hit) begin
        failures++; $display("FAIL reset value entry %0d = %0d", i, r_tpre);
      end
    end
    // fill
    for (int i = 0; i < 36; i++) begin
      @(negedge clk);
      w_en = 1'b1; w_addr = 6'(i); w_data = entry_val(i);
    end
    @(negedge clk); w_en = 1'b0;
    // boundaries
    for (int p = 0; p < 6; p++)
      for (int r = 0; r < 6; r++) begin
        query(p * 250, r * 60);
        query(p * 250 + 249, r * 60 + 59);
      end
    // out of range
    query(1500, 0); query(0, 360); query(2000, 365); query(65535, 10);
    // random
    for (int n = 0; n < 300; n++) query(int'($urandom_range(0, 2100)), int'($urandom_range(0, 420)));
    // no response without a query
    @(negedge clk); checks++;
    if (r_valid) begin failures++; $display("FAIL r_valid without query"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
