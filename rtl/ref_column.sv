// ref_column: behavioural model of the shared ADC reference (replica) column (an analog part).
//
// The column is built from the same dual 8T cells as the MAC array. Following the paper's
// text, the lower INIT_CELLS rows hold weight -1 and serve the initial ramp voltage and
// calibration, and the upper RAMP_CELLS rows hold weight +1 and generate the ramp. Their
// weights are written while rst_n is low (this design's choice: the paper does not say how
// the replica cells get their weights).
//
// Operation: pch_adc precharges the column at the start of the calibration cycle; in that
// cycle the 2^(n_o-1) enabled -1 cells set V_init = -2^(n_o-1) units. In each following cycle
// one more +1 cell is pulsed without a new precharge, so the reference rises by one unit per
// cycle: after step k it is -2^(n_o-1) + k units. The output vadc is combinational (it
// includes the discharge of the current cycle) and the bit-line state is captured on the
// rising edge, so a sense amplifier strobed at the end of the cycle sees the new level.
// The output is V_ADC = +V_ADC - (-V_ADC) before the voltage buffers.
module ref_column
  import cim_pkg::*;
#(
  parameter int R     = ROWS,
  parameter int NINIT = INIT_CELLS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pch_adc,  // reference-column precharge (PCH gated by SADC)
  input  logic [R-1:0] ref_rwl,  // Ini / Rp word lines (RWL gated by SADC)
  output vadc_t        vadc      // differential reference voltage in units
);

  logic  dis_l [R];
  logic  dis_r [R];
  cell_t stored [R];   // read-back of the cells, for debug and testbenches
  vadc_t bl_prev;

  for (genvar r = 0; r < R; r++) begin : g_row
    dual8t_cell u_cell (
      .clk   (clk),
      .wl    (~rst_n),
      .wdata ((r < NINIT) ? CELL_NEG : CELL_POS),
      .rwl   (ref_rwl[r]),
      .stored(stored[r]),
      .dis_l (dis_l[r]),
      .dis_r (dis_r[r])
    );
  end

  always_comb begin
    vadc = pch_adc ? vadc_t'(0) : bl_prev;
    for (int r = 0; r < R; r++) begin
      vadc = vadc + vadc_t'({1'b0, dis_l[r]}) - vadc_t'({1'b0, dis_r[r]});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bl_prev <= '0;
    else        bl_prev <= vadc;
  end

endmodule
