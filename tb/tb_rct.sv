// tb_rct: checks the per-column counter: it counts cycles with inc high, clears on clr, holds
// at 2^n_o - 1 for every output resolution, and holds its value when inc is low.
module tb_rct;
  import cim_pkg::*;

  logic              clk = 1'b0;
  logic              rst_n, clr, inc;
  logic [2:0]        no;
  logic [NO_MAX-1:0] code;
  int checks = 0, failures = 0;

  rct dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clr = 1'b0; inc = 1'b0; no = 3'd4;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (code != 0) begin failures++; $display("not reset"); end
    for (int t = 0; t < 300; t++) begin
      automatic int n_o = $urandom_range(1, 7);
      automatic int pulses = 0;
      automatic int steps = 1 << n_o;
      int expv;
      @(negedge clk); clr = 1'b1; no = 3'(n_o);
      @(negedge clk); clr = 1'b0;
      for (int k = 0; k < steps; k++) begin
        // thermometer in time: high for the first m steps (random m), sometimes all
        inc = (t % 5 == 0) ? 1'b1 : 1'($urandom_range(0, 1));
        if (inc) pulses++;
        @(negedge clk);
      end
      inc = 1'b0;
      expv = (pulses > steps - 1) ? steps - 1 : pulses;
      checks++;
      if (int'(code) != expv) begin
        failures++;
        $display("no=%0d pulses=%0d: code=%0d expected %0d", n_o, pulses, code, expv);
      end
      repeat (2) @(negedge clk);
      checks++;
      if (int'(code) != expv) begin failures++; $display("not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
