// tb_dual8t_array: checks the MAC array model at a reduced size (32 rows x 5 columns).
// Random ternary weights are written row by row; random input bits are applied with
// precharge, and every column's output must equal sum_r W[r][c] * x[r]. Cycles without
// precharge must add the new discharge to the bit-line state left by the previous cycle.
module tb_dual8t_array;
  import cim_pkg::*;

  localparam int R = 32;
  localparam int C = 5;

  logic                 clk = 1'b0;
  logic                 wr_en, pch;
  logic [$clog2(R)-1:0] wr_row;
  cell_t                wr_data [C];
  logic [R-1:0]         rwl;
  vmac_t                vmac [C];
  int w [R][C];
  int checks = 0, failures = 0;

  dual8t_array #(.R(R), .C(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cell_t enc(int v);
    return (v > 0) ? CELL_POS : (v < 0) ? CELL_NEG : CELL_ZERO;
  endfunction

  initial begin
    int prev [C];
    wr_en = 1'b0; pch = 1'b1; rwl = '0; wr_row = '0;
    for (int c = 0; c < C; c++) wr_data[c] = CELL_ZERO;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_row = $clog2(R)'(r);
        for (int c = 0; c < C; c++) begin
          w[r][c] = (t == 0) ? 1 : (t == 1) ? -1 : $urandom_range(0, 2) - 1;
          wr_data[c] = enc(w[r][c]);
        end
      end
      @(negedge clk); wr_en = 1'b0;
      for (int c = 0; c < C; c++) prev[c] = 0;
      for (int k = 0; k < 10; k++) begin
        pch = (k % 3 != 2);        // every third cycle without precharge
        rwl = (k == 0) ? '1 : R'({$urandom, $urandom});
        #1;
        for (int c = 0; c < C; c++) begin
          automatic int expv = pch ? 0 : prev[c];
          for (int r = 0; r < R; r++) if (rwl[r]) expv += w[r][c];
          checks++;
          if (int'(vmac[c]) != expv) begin
            failures++;
            $display("t=%0d k=%0d col %0d: vmac=%0d expected %0d", t, k, c, vmac[c], expv);
          end
          prev[c] = expv;
        end
        @(negedge clk);
      end
      pch = 1'b1; rwl = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
