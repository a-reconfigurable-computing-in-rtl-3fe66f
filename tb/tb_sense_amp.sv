// tb_sense_amp: checks the comparator: V_ON = en and (V_Acc > V_ADC), with V_Acc in fixed point
// (FRAC fractional bits) and V_ADC in units, over directed edge cases and random values.
module tb_sense_amp;
  import cim_pkg::*;

  logic  en, von;
  vacc_t vacc;
  vadc_t vadc;
  int checks = 0, failures = 0;

  sense_amp dut (.*);

  task automatic check(logic e, longint a, int r);
    logic expv;
    en = e; vacc = vacc_t'(a); vadc = vadc_t'(r);
    #1;
    expv = e && (a > (longint'(r) << FRAC));
    checks++;
    if (von !== expv) begin
      failures++;
      $display("en=%0b vacc=%0d vadc=%0d: von=%0b", e, a, r, von);
    end
  endtask

  initial begin
    check(1, 0, 0);
    check(1, 1, 0);
    check(1, -1, 0);
    check(1, 128, 1);
    check(1, 129, 1);
    check(1, -128*64, -64);
    check(1, -128*64 + 1, -64);
    check(1, 256*128, 64);
    check(0, 256*128, -64);
    for (int i = 0; i < 2000; i++)
      check(1'($urandom_range(0, 3) != 0), longint'($urandom_range(0, 65535)) - 32768,
            $urandom_range(0, 256) - 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
