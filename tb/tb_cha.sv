// tb_cha: checks the charge-sharing accumulator.
// Random sequences of 1..7 MAC voltages (full range +-256 units) are applied LSB-first after a
// clear; after the last one the accumulated value must equal sum_i V_MAC(i) * 2^i / 2^n exactly
// (computed here in integers scaled by 2^FRAC). The value must also hold while share is low.
module tb_cha;
  import cim_pkg::*;

  logic  clk = 1'b0;
  logic  rst_acc, share;
  vmac_t vmac;
  vacc_t vacc;
  int checks = 0, failures = 0;

  cha dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_acc = 1'b1; share = 1'b0; vmac = '0;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      automatic int n = $urandom_range(1, NI_MAX);
      automatic longint expv = 0;
      @(negedge clk); rst_acc = 1'b1;
      @(negedge clk); rst_acc = 1'b0;
      for (int i = 0; i < n; i++) begin
        automatic int v = (t % 4 == 0) ? ((i % 2) ? 256 : -256) : $urandom_range(0, 512) - 256;
        if (t % 4 == 1) v = 256;
        share = 1'b1;
        vmac  = vmac_t'(v);
        expv += longint'(v) << i;
        @(negedge clk);
      end
      share = 1'b0;
      vmac  = vmac_t'($urandom_range(0, 100));
      expv = (expv << FRAC) >>> n;
      checks++;
      if (longint'(vacc) != expv) begin
        failures++;
        $display("n=%0d: vacc=%0d expected %0d", n, vacc, expv);
      end
      @(negedge clk);
      checks++;
      if (longint'(vacc) != expv) begin
        failures++;
        $display("value not held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
