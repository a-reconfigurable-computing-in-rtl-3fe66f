// rwl_driver: read-word-line (input) drivers of the MAC array.
//
// Inputs are applied bit-serially: in an input-bit cycle the driver puts bit bit_idx of
// every input x[g] on the read word lines. A multi-bit weight occupies several rows of a
// column (1, 3 or 7 cells, Fig. 6 of the paper) and all cells of one weight receive the same
// input, so row r is driven by input g = r / cells_per_weight. Rows left over when ROWS is not
// a multiple of the cells per weight (4 rows at 4-bit weights, 1 row at 3-bit weights) are
// never driven. Outside an enabled cycle every RWL is low.
//
// The paper's buffers run from a lower 0.8 V supply (RWL under-drive cascode) to extend the
// bit-line swing; that is an analog property and is not modelled. Rows beyond the number of
// weights are this design's choice.
// Interface: x holds ROWS inputs of NI_MAX bits (only the first ROWS/cells_per_weight are used);
// R inputs are used at 2-bit weights, R/3 at 3-bit and R/7 at 4-bit weights.
// Timing: combinational.
module rwl_driver
  import cim_pkg::*;
#(
  parameter int R = ROWS
) (
  input  logic                      en,       // RWL pulse of this cycle
  input  logic [$clog2(NI_MAX)-1:0] bit_idx,  // input bit applied in this cycle (LSB first)
  input  wmode_e                    wmode,    // cells per weight 1 / 3 / 7
  input  logic [NI_MAX-1:0]         x [R],    // input vector
  output logic [R-1:0]              rwl       // read word lines
);

  localparam int N3 = R / 3;  // inputs at 3-bit weights
  localparam int N7 = R / 7;  // inputs at 4-bit weights

  for (genvar r = 0; r < R; r++) begin : g_row
    localparam int G3 = r / 3;
    localparam int G7 = r / 7;
    logic b;
    always_comb begin
      b = 1'b0;
      case (wmode)
        W2B:     b = x[r][bit_idx];
        W3B:     if (G3 < N3) b = x[G3][bit_idx];
        W4B:     if (G7 < N7) b = x[G7][bit_idx];
        default: b = 1'b0;
      endcase
    end
    assign rwl[r] = en & b;
  end

endmodule
