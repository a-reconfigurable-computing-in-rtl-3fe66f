// tb_mlp_tiles: runs the weight tiles of a 784-128-128-10 MLP (the MNIST network of the
// source, at its 4-bit input / ternary weight / 4-bit output operating point) through the
// full-size macro, one operation per tile.
//
// A layer with IN inputs and OUT outputs is cut into ceil(IN/256) x ceil(OUT/127) tiles; each
// tile's weights are written (unused rows and columns as zero), its 4-bit inputs applied and
// one operation run. Every valid column code is compared with the ideal transfer
//   code = min(15, #{k in 1..16 : (k - 8) * 16 < y}),  y = tile dot product,
// and the busy time with 4 + 1 + 16 cycles. Adding tile results across row tiles and the
// activation between layers belong to the system around the macro and are not done here, so
// the layer inputs are random 4-bit values. Weights are random ternary values with 50% zeros
// (the source reports at least 40% zero weights after 2-bit quantization).
module tb_mlp_tiles;
  import cim_pkg::*;

  localparam int R = ROWS;
  localparam int C = MAC_COLS;
  localparam int NI = 4;
  localparam int NO = 4;

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

  int checks = 0, failures = 0, tiles = 0;
  int w [R][C];

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(int rows_used, int cols_used);
    int busy_cycles;
    for (int g = 0; g < R; g++)
      for (int c = 0; c < C; c++) begin
        automatic int r = $urandom_range(0, 3);
        w[g][c] = (g >= rows_used || c >= cols_used || r < 2) ? 0 : (r == 2 ? 1 : -1);
      end
    for (int g = 0; g < R; g++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_wmode = W2B; wr_group = 8'(g); wr_slot = '0;
      for (int c = 0; c < C; c++) begin
        wr_wsign[c] = (w[g][c] < 0);
        wr_wmag[c]  = MAG_W'(w[g][c] != 0);
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int g = 0; g < R; g++) x[g] = (g < rows_used) ? NI_MAX'($urandom_range(0, 15)) : '0;
    cfg_in = '{ni: 3'(NI), no: 3'(NO), wmode: W2B};
    start  = 1'b1;
    @(negedge clk);
    start = 1'b0;
    busy_cycles = 1;
    while (!done) begin
      @(negedge clk);
      if (busy && !done) busy_cycles++;
    end
    checks++;
    if (busy_cycles != NI + 1 + (1 << NO)) begin
      failures++;
      $display("latency %0d", busy_cycles);
    end
    for (int c = 0; c < cols_used; c++) begin
      automatic int y = 0;
      automatic int e = 0;
      for (int g = 0; g < rows_used; g++) y += w[g][c] * int'(x[g]);
      for (int k = 1; k <= (1 << NO); k++) if ((k - (1 << (NO - 1))) * (1 << NI) < y) e++;
      if (e > (1 << NO) - 1) e = (1 << NO) - 1;
      checks++;
      if (int'(code[c]) != e) begin
        failures++;
        if (failures < 10) $display("tile %0d col %0d: code %0d expected %0d (y=%0d)", tiles, c, code[c], e, y);
      end
    end
    tiles++;
  endtask

  task automatic run_layer(int n_in, int n_out);
    int rt = (n_in + R - 1) / R;
    int ct = (n_out + C - 1) / C;
    for (int i = 0; i < rt; i++)
      for (int j = 0; j < ct; j++)
        run_tile((n_in - i * R > R) ? R : n_in - i * R, (n_out - j * C > C) ? C : n_out - j * C);
    $display("layer %0d -> %0d: %0d x %0d tiles", n_in, n_out, rt, ct);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; wr_en = 1'b0; wr_wmode = W2B; wr_group = '0; wr_slot = '0;
    cfg_in = '{ni: 3'd1, no: 3'd1, wmode: W2B};
    for (int c = 0; c < C; c++) begin wr_wsign[c] = 1'b0; wr_wmag[c] = '0; end
    for (int g = 0; g < R; g++) x[g] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_layer(784, 128);
    run_layer(128, 128);
    run_layer(128, 10);
    checks++;
    if (tiles != 11) begin failures++; $display("tile count %0d", tiles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
