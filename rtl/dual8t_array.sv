// dual8t_array: behavioural model of the ROWS x COLS dual 8T MAC array with its bit-line
// precharge (an analog part).
//
// Every column holds one weight vector in dual 8T cells. The read word lines rwl[r] carry
// one bit of the input for every row; all rows are read at once, and the differential
// bit-line voltage of a column grows by one unit for every cell that discharges RBLL and
// falls by one for every cell that discharges RBLR. The output vmac[c] is that differential
// voltage V_MACN - V_MACP in units, so that for a single input bit it equals
// sum_k W_k * X_k of the column (Eq. for V_MAC in the paper).
//
// Precharge: when pch is high the bit lines start the cycle from the precharged level
// (zero difference); when pch is low the discharge of the cycle adds to what was left on the
// bit lines. The controller precharges in every input-bit cycle, as in the paper's timing
// diagram. The bit-line state is captured on the rising edge.
//
// Write port: wr_en writes the cells of row wr_row of every column with wr_data in one cycle
// (this design's stand-in for the normal SRAM write, which the paper does not describe).
// Timing: vmac is combinational in rwl, pch and the stored weights.
module dual8t_array
  import cim_pkg::*;
#(
  parameter int R = ROWS,
  parameter int C = MAC_COLS
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [$clog2(R)-1:0] wr_row,
  input  cell_t                wr_data [C],
  input  logic                 pch,       // bit-line precharge at the start of this cycle
  input  logic [R-1:0]         rwl,       // read word lines
  output vmac_t                vmac [C]   // differential bit-line voltage in units
);

  logic  dis_l [C][R];
  logic  dis_r [C][R];
  cell_t stored [C][R];   // read-back of the cells, for debug and testbenches
  vmac_t bl_prev [C];

  for (genvar c = 0; c < C; c++) begin : g_col
    for (genvar r = 0; r < R; r++) begin : g_row
      dual8t_cell u_cell (
        .clk   (clk),
        .wl    (wr_en && (wr_row == r[$clog2(R)-1:0])),
        .wdata (wr_data[c]),
        .rwl   (rwl[r]),
        .stored(stored[c][r]),
        .dis_l (dis_l[c][r]),
        .dis_r (dis_r[c][r])
      );
    end

    always_comb begin
      vmac_t sum;
      sum = pch ? vmac_t'(0) : bl_prev[c];
      for (int r = 0; r < R; r++) begin
        sum = sum + vmac_t'({1'b0, dis_l[c][r]}) - vmac_t'({1'b0, dis_r[c][r]});
      end
      vmac[c] = sum;
    end

    always_ff @(posedge clk) bl_prev[c] <= vmac[c];
  end

endmodule
