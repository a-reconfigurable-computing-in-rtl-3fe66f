// tb_cim_macro: end-to-end test of the full macro at its default size (256 rows x 127 MAC
// columns, no parameter overrides).
//
// For a list of configurations (input bits n_i, output bits n_o, weight resolution) the test
// writes a fresh random weight matrix through the weight-write port, applies a random input
// vector, runs one operation and compares all 127 codes with a reference computed here from
// integers only:
//   y_c  = sum_g W[g][c] * x[g]                      (exact dot product)
//   code = min(2^n_o - 1, #{k in 1..2^n_o : (k - 2^(n_o-1)) * 2^n_i < y_c})
// which is the ideal ramp-ADC transfer of the charge-shared voltage y_c / 2^n_i.
// The probability of a positive weight differs from column to column, so codes spread from
// 0 to full scale. The busy time of every operation is checked against n_i + 1 + 2^n_o.
// Mechanisms counted (each must occur): each weight resolution, single-bit and multi-bit
// input accumulation, zero-skipped cells under an active input bit, negative dot products,
// code 0 (ramp never below V_Acc), counter saturation, and several output resolutions.
// The external reference buffer is ideal (vadc_buf = vadc_ref).
module tb_cim_macro;
  import cim_pkg::*;

  localparam int R = ROWS;
  localparam int C = MAC_COLS;

  logic                clk = 1'b0;
  logic                rst_n;
  logic                start;
  cfg_t                cfg_in;
  logic [NI_MAX-1:0]   x [R];
  logic                busy, done;
  logic [NO_MAX-1:0]   code [C];
  logic                wr_en;
  wmode_e              wr_wmode;
  logic [7:0]          wr_group;
  logic [2:0]          wr_slot;
  logic                wr_wsign [C];
  logic [MAG_W-1:0]    wr_wmag [C];
  vadc_t               vadc_ref, vadc_buf;

  assign vadc_buf = vadc_ref;

  cim_macro dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  // mechanism counters
  int n_mode [3];
  int n_single_bit, n_multi_bit, n_zskip, n_negative, n_code0, n_saturate, n_no_small, n_no_large;

  int w [R][C];   // weight of group g in column c (signed)

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cpw(wmode_e m);
    return cells_per_weight(m);
  endfunction

  task automatic write_weights(wmode_e m);
    int ng = R / cpw(m);
    int maxmag = (m == W2B) ? 1 : (m == W3B) ? 3 : 7;
    for (int g = 0; g < ng; g++) begin
      for (int c = 0; c < C; c++) begin
        int pz = $urandom_range(0, 99);
        int ppos = (c * 100) / (C - 1);   // chance of a positive weight grows with c
        if (pz < 40) w[g][c] = 0;
        else begin
          int mag = $urandom_range(1, maxmag);
          w[g][c] = ($urandom_range(0, 99) < ppos) ? mag : -mag;
        end
      end
    end
    for (int g = 0; g < ng; g++) begin
      for (int s = 0; s < cpw(m); s++) begin
        @(negedge clk);
        wr_en    = 1'b1;
        wr_wmode = m;
        wr_group = 8'(g);
        wr_slot  = 3'(s);
        for (int c = 0; c < C; c++) begin
          wr_wsign[c] = (w[g][c] < 0);
          wr_wmag[c]  = MAG_W'((w[g][c] < 0) ? -w[g][c] : w[g][c]);
        end
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic run_op(int ni, int no, wmode_e m);
    int ng = R / cpw(m);
    int busy_cycles;
    int fails_before = failures;
    write_weights(m);
    for (int g = 0; g < R; g++) x[g] = (g < ng) ? NI_MAX'($urandom_range(0, (1 << ni) - 1)) : '0;
    // make sure some inputs are full scale
    x[0] = NI_MAX'((1 << ni) - 1);
    @(negedge clk);
    cfg_in = '{ni: 3'(ni), no: 3'(no), wmode: m};
    start  = 1'b1;
    @(negedge clk);
    start = 1'b0;
    busy_cycles = 1;   // the first busy cycle has begun
    while (!done) begin
      @(negedge clk);
      if (busy && !done) busy_cycles++;
    end
    checks++;
    if (busy_cycles != ni + 1 + (1 << no)) begin
      failures++;
      $display("latency mismatch ni=%0d no=%0d: %0d cycles, expected %0d", ni, no, busy_cycles,
               ni + 1 + (1 << no));
    end
    // reference
    for (int c = 0; c < C; c++) begin
      longint y = 0;
      int exp_code = 0;
      int h = 1 << (no - 1);
      for (int g = 0; g < ng; g++) begin
        y += longint'(w[g][c]) * longint'(x[g]);
        if (w[g][c] == 0 && x[g] != 0) n_zskip++;
      end
      for (int k = 1; k <= (1 << no); k++)
        if ((longint'(k) - longint'(h)) * longint'(1 << ni) < y) exp_code++;
      if (exp_code > (1 << no) - 1) begin
        exp_code = (1 << no) - 1;
        n_saturate++;
      end
      if (exp_code == 0) n_code0++;
      if (y < 0) n_negative++;
      checks++;
      if (int'(code[c]) != exp_code) begin
        failures++;
        if (failures < 20)
          $display("code mismatch ni=%0d no=%0d mode=%0d col=%0d: got %0d expected %0d (y=%0d)",
                   ni, no, m, c, code[c], exp_code, y);
      end
    end
    n_mode[int'(m)]++;
    if (ni == 1) n_single_bit++; else n_multi_bit++;
    if (no <= 2) n_no_small++;
    if (no >= 6) n_no_large++;
    $display("op ni=%0d no=%0d mode=%0d: %0d busy cycles, %0d new failures", ni, no, m,
             busy_cycles, failures - fails_before);
  endtask

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin
      failures++;
      $display("mechanism %s never happened", name);
    end
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; wr_en = 1'b0; wr_wmode = W2B; wr_group = '0; wr_slot = '0;
    cfg_in = '{ni: 3'd1, no: 3'd1, wmode: W2B};
    for (int c = 0; c < C; c++) begin wr_wsign[c] = 1'b0; wr_wmag[c] = '0; end
    for (int g = 0; g < R; g++) x[g] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    run_op(4, 4, W2B);   // the paper's 4/2/4b operating point
    run_op(1, 1, W2B);   // 1/2/1b
    run_op(3, 3, W2B);
    run_op(5, 5, W3B);
    run_op(2, 6, W3B);
    run_op(7, 7, W4B);   // 7/4/7b, highest precision
    run_op(4, 2, W4B);

    mech("2-bit weights", n_mode[0]);
    mech("3-bit weights", n_mode[1]);
    mech("4-bit weights", n_mode[2]);
    mech("single-bit input", n_single_bit);
    mech("multi-bit accumulation", n_multi_bit);
    mech("zero-skipped weights", n_zskip);
    mech("negative dot product", n_negative);
    mech("code 0", n_code0);
    mech("counter saturation", n_saturate);
    mech("output <= 2 bits", n_no_small);
    mech("output >= 6 bits", n_no_large);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
