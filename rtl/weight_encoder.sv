// weight_encoder: maps one signed multi-bit weight onto the dual 8T cells that store it.
//
// Following Fig. 6 of the paper, a weight is given in sign-magnitude form. Its sign picks
// the side of the dual 8T cells (left cell high for positive, right cell high for negative)
// and its magnitude bits are stored in groups of 1, 2 and 4 identical cells that share one
// input, so the column current is proportional to the weight:
//   2-bit weight (-1,0,+1): 1 cell,  slot 0 = magnitude bit 0;
//   3-bit weight (-3..+3):  3 cells, slot 0 = bit 0, slots 1-2 = bit 1;
//   4-bit weight (-7..+7):  7 cells, slot 0 = bit 0, slots 1-2 = bit 1, slots 3-6 = bit 2.
// A cell whose magnitude bit is 0 stores weight 0 (no discharge path). Negative zero is
// stored as zero. Magnitude bits above the selected resolution are ignored.
// Interface: wmag/wsign is the weight, slot the cell within the weight (0..cells-1); wcell is
// the value to write to that row. Slots beyond the weight's cells give CELL_ZERO.
// Timing: combinational.
module weight_encoder
  import cim_pkg::*;
(
  input  wmode_e           wmode,
  input  logic             wsign,  // 1 = negative
  input  logic [MAG_W-1:0] wmag,   // magnitude
  input  logic [2:0]       slot,   // cell within the weight
  output cell_t            wcell
);

  logic [MAG_W-1:0] mag;
  logic             bit_on;

  always_comb begin
    case (wmode)
      W2B:     mag = {2'b00, wmag[0]};
      W3B:     mag = {1'b0, wmag[1:0]};
      W4B:     mag = wmag;
      default: mag = '0;
    endcase
    case (slot)
      3'd0:          bit_on = mag[0];
      3'd1, 3'd2:    bit_on = mag[1];
      3'd3, 3'd4,
      3'd5, 3'd6:    bit_on = mag[2];
      default:       bit_on = 1'b0;
    endcase
    if (!bit_on)    wcell = CELL_ZERO;
    else if (wsign) wcell = CELL_NEG;
    else            wcell = CELL_POS;
  end

endmodule
