// tb_weight_encoder: for every weight resolution, sign and magnitude, sums the ternary values
// of the 1/3/7 cells produced for the slots of the weight and checks that the sum equals the
// signed weight, that each cell is on the weight's side, and that slots past the weight give
// zero. Also checks the two examples of the paper's figure (+3 at 3 bits, -5 at 4 bits).
module tb_weight_encoder;
  import cim_pkg::*;

  wmode_e           wmode;
  logic             wsign;
  logic [MAG_W-1:0] wmag;
  logic [2:0]       slot;
  cell_t            wcell;
  int checks = 0, failures = 0;

  weight_encoder dut (.*);

  function automatic int val(cell_t c);
    return (c == CELL_POS) ? 1 : (c == CELL_NEG) ? -1 : 0;
  endfunction

  initial begin
    for (int m = 0; m < 3; m++) begin
      automatic int ncell = (m == 0) ? 1 : (m == 1) ? 3 : 7;
      automatic int maxm  = (m == 0) ? 1 : (m == 1) ? 3 : 7;
      for (int s = 0; s < 2; s++) begin
        for (int mag = 0; mag <= maxm; mag++) begin
          automatic int sum = 0;
          automatic int expv = s ? -mag : mag;
          for (int sl = 0; sl < 8; sl++) begin
            wmode = wmode_e'(m); wsign = 1'(s); wmag = MAG_W'(mag); slot = 3'(sl);
            #1;
            if (sl < ncell) sum += val(wcell);
            else begin
              checks++;
              if (wcell != CELL_ZERO) begin failures++; $display("slot %0d past weight not zero", sl); end
            end
            checks++;
            if ((s && wcell == CELL_POS) || (!s && wcell == CELL_NEG)) begin
              failures++; $display("wrong side m=%0d s=%0d mag=%0d slot=%0d", m, s, mag, sl);
            end
          end
          checks++;
          if (sum != expv) begin
            failures++;
            $display("mode %0d weight %0d: cells sum to %0d", m, expv, sum);
          end
        end
      end
    end
    // paper examples: +3 (3-bit) -> 1,1,1 ; -5 (4-bit) -> -1,0,0,-1,-1,-1,-1
    begin
      automatic int ex3 [3] = '{1, 1, 1};
      automatic int ex5 [7] = '{-1, 0, 0, -1, -1, -1, -1};
      for (int sl = 0; sl < 3; sl++) begin
        wmode = W3B; wsign = 1'b0; wmag = 3'd3; slot = 3'(sl); #1;
        checks++; if (val(wcell) != ex3[sl]) begin failures++; $display("+3 slot %0d", sl); end
      end
      for (int sl = 0; sl < 7; sl++) begin
        wmode = W4B; wsign = 1'b1; wmag = 3'd5; slot = 3'(sl); #1;
        checks++; if (val(wcell) != ex5[sl]) begin failures++; $display("-5 slot %0d", sl); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
