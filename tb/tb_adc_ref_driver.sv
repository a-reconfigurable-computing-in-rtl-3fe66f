// tb_adc_ref_driver: checks the SADC gating. With SADC low the strobes go to the MAC side
// only and no reference row is pulsed. With SADC high: no MAC strobes; in the calibration
// cycle exactly rows 0 .. 2^(n_o-1)-1 are pulsed; in ramp step k exactly row INIT_CELLS+k-1.
module tb_adc_ref_driver;
  import cim_pkg::*;

  logic            sadc, pch, rwl_en, calib;
  logic [7:0]      step;
  logic [2:0]      no;
  logic            pch_mac, rwl_mac_en, pch_adc;
  logic [ROWS-1:0] ref_rwl;
  int checks = 0, failures = 0;

  adc_ref_driver dut (.*);

  task automatic check_rows(logic [ROWS-1:0] e, string what);
    checks++;
    if (ref_rwl !== e) begin
      failures++;
      $display("%s: rows %0d set, expected %0d", what, $countones(ref_rwl), $countones(e));
    end
  endtask

  initial begin
    for (int n_o = 1; n_o <= NO_MAX; n_o++) begin
      logic [ROWS-1:0] e;
      no = 3'(n_o);
      // MAC cycle
      sadc = 1'b0; pch = 1'b1; rwl_en = 1'b1; calib = 1'b0; step = '0; #1;
      checks++;
      if (!(pch_mac && rwl_mac_en && !pch_adc)) begin failures++; $display("MAC gating"); end
      check_rows('0, "MAC cycle");
      // calibration cycle
      sadc = 1'b1; calib = 1'b1; #1;
      checks++;
      if (pch_mac || rwl_mac_en || !pch_adc) begin failures++; $display("calib gating"); end
      e = '0;
      for (int r = 0; r < (1 << (n_o - 1)); r++) e[r] = 1'b1;
      check_rows(e, "calibration");
      // ramp steps
      for (int k = 1; k <= (1 << n_o); k++) begin
        pch = 1'b0; calib = 1'b0; step = 8'(k); #1;
        e = '0; e[INIT_CELLS + k - 1] = 1'b1;
        check_rows(e, "ramp");
        checks++;
        if (pch_adc || rwl_mac_en) begin failures++; $display("ramp gating"); end
      end
      rwl_en = 1'b0; #1;
      check_rows('0, "no RWL pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
