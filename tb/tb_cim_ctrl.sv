// tb_cim_ctrl: checks the operation sequence for every (n_i, n_o) pair with 1..7 bits:
// n_i MAC cycles with bit indices 0..n_i-1 in order, each with precharge, RWL and sharing and
// SADC low; one calibration cycle; 2^n_o ramp cycles with steps 1..2^n_o and the SA strobe;
// then one done cycle. Also checks that start is ignored while busy, that the counters are
// cleared on acceptance, and that the accumulators are held cleared while idle.
module tb_cim_ctrl;
  import cim_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n, start;
  cfg_t       cfg_in, cfg;
  state_e     state;
  logic       busy, done, pch, rwl_en, share, cha_rst, sadc, calib, sa_en, rct_clr;
  logic [2:0] bit_idx;
  logic [7:0] step;
  int checks = 0, failures = 0;

  cim_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("%s", s);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; cfg_in = '{ni: 3'd1, no: 3'd1, wmode: W2B};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int ni = 1; ni <= NI_MAX; ni++) begin
      for (int no = 1; no <= NO_MAX; no++) begin
        @(negedge clk);
        checks++;
        if (busy || !cha_rst) fail("idle state wrong");
        cfg_in = '{ni: 3'(ni), no: 3'(no), wmode: wmode_e'((ni + no) % 3)};
        start = 1'b1;
        #1;
        checks++;
        if (!rct_clr) fail("rct_clr missing on start");
        @(negedge clk);
        start = 1'b1;   // held high: must be ignored while busy
        for (int b = 0; b < ni; b++) begin
          checks++;
          if (!(busy && pch && rwl_en && share && !sadc && !cha_rst && bit_idx == 3'(b) && !rct_clr))
            fail($sformatf("MAC cycle %0d wrong (ni=%0d)", b, ni));
          @(negedge clk);
          start = 1'b0;
        end
        checks++;
        if (!(sadc && calib && pch && rwl_en && !share && !sa_en && step == 0))
          fail("calibration cycle wrong");
        @(negedge clk);
        for (int k = 1; k <= (1 << no); k++) begin
          checks++;
          if (!(sadc && sa_en && rwl_en && !pch && !calib && step == 8'(k) && !done))
            fail($sformatf("ramp step %0d wrong (no=%0d, step=%0d)", k, no, step));
          @(negedge clk);
        end
        checks++;
        if (!(done && !sadc && cfg.ni == 3'(ni) && cfg.no == 3'(no)))
          fail($sformatf("done missing ni=%0d no=%0d", ni, no));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
