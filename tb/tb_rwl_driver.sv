// tb_rwl_driver: checks the input drivers at full size (256 rows). For each weight
// resolution and input bit, with random inputs, RWL r must carry bit b of input r / cells
// (1, 3 or 7 cells per weight), unused rows must stay low, and nothing may be driven when
// the enable is low.
module tb_rwl_driver;
  import cim_pkg::*;

  logic                      en;
  logic [$clog2(NI_MAX)-1:0] bit_idx;
  wmode_e                    wmode;
  logic [NI_MAX-1:0]         x [ROWS];
  logic [ROWS-1:0]           rwl;
  int checks = 0, failures = 0;

  rwl_driver dut (.*);

  initial begin
    for (int t = 0; t < 30; t++) begin
      for (int g = 0; g < ROWS; g++) x[g] = NI_MAX'($urandom);
      for (int m = 0; m < 3; m++) begin
        automatic int cpw = (m == 0) ? 1 : (m == 1) ? 3 : 7;
        automatic int ng  = ROWS / cpw;
        for (int b = 0; b < NI_MAX; b++) begin
          en = (t % 6 != 5); wmode = wmode_e'(m); bit_idx = 3'(b);
          #1;
          for (int r = 0; r < ROWS; r++) begin
            automatic logic e = en && (r / cpw < ng) && x[r / cpw][b];
            checks++;
            if (rwl[r] !== e) begin
              failures++;
              if (failures < 10) $display("mode %0d bit %0d row %0d: %0b expected %0b", m, b, r, rwl[r], e);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
