// tb_ref_column: checks the reference column at full size (256 rows, 128 of weight -1).
// After reset, for every output resolution: the calibration cycle (precharge plus the first
// 2^(n_o-1) weight -1 rows) must give -2^(n_o-1); each ramp step pulsing one +1 row must
// raise the reference by one unit without precharge; a final precharge returns it to 0.
module tb_ref_column;
  import cim_pkg::*;

  logic           clk = 1'b0;
  logic           rst_n, pch_adc;
  logic [ROWS-1:0] ref_rwl;
  vadc_t          vadc;
  int checks = 0, failures = 0;

  ref_column dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_v(int e, string what);
    #1;
    checks++;
    if (int'(vadc) != e) begin
      failures++;
      $display("%s: vadc=%0d expected %0d", what, vadc, e);
    end
  endtask

  initial begin
    rst_n = 1'b0; pch_adc = 1'b0; ref_rwl = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int no = 1; no <= NO_MAX; no++) begin
      automatic int h = 1 << (no - 1);
      @(negedge clk);
      pch_adc = 1'b1;
      ref_rwl = '0;
      for (int r = 0; r < h; r++) ref_rwl[r] = 1'b1;
      expect_v(-h, "calibration");
      for (int k = 1; k <= (1 << no); k++) begin
        @(negedge clk);
        pch_adc = 1'b0;
        ref_rwl = '0;
        ref_rwl[INIT_CELLS + k - 1] = 1'b1;
        expect_v(-h + k, "ramp step");
      end
      @(negedge clk);
      ref_rwl = '0;
      expect_v(h, "hold");
      pch_adc = 1'b1;
      expect_v(0, "precharge");
    end
    // all cells at once: 128 - 128 = 0, and half of each side
    @(negedge clk); pch_adc = 1'b1; ref_rwl = '1; expect_v(0, "all rows");
    @(negedge clk); ref_rwl = '0; ref_rwl[ROWS-1:INIT_CELLS] = '1; expect_v(RAMP_CELLS, "all +1 rows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
