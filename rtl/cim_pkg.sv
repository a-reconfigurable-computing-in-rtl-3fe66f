// cim_pkg: shared sizes, types and helper functions of the dual-8T compute-in-memory macro.
//
// The macro multiplies a 256-entry bit-serial input vector with a stored ternary/multi-bit
// weight matrix in 127 MAC columns, accumulates the per-bit partial sums in the charge domain
// and digitises every column with a ramp ADC whose reference comes from one shared replica
// column. The sizes below (256 rows, 127 MAC columns plus one reference column, 1-7 bit input
// and output, 2-4 bit weights, 1/3/7 cells per weight) are the paper's.
//
// Analog quantities are carried between the behavioural models as signed integers:
//   * a bit-line MAC voltage in units of one bitcell discharge (one "unit"), vmac_t;
//   * the accumulated capacitor voltage as a fixed-point number with FRAC fractional bits,
//     vacc_t. Because the accumulator halves its value once per input bit and at most NI_MAX
//     bits are applied, FRAC = NI_MAX makes the fixed-point value exact;
//   * the ramp reference voltage in units, vadc_t.
// This integer scaling is this design's own choice; the paper works in volts.
package cim_pkg;

  localparam int ROWS       = 256;  // rows of the array (input vector dimension N)
  localparam int MAC_COLS   = 127;  // MAC columns, one IMADC each
  localparam int NI_MAX     = 7;    // maximum input resolution n_i
  localparam int NO_MAX     = 7;    // maximum output (ADC) resolution n_o
  localparam int INIT_CELLS = 128;  // reference-column cells of weight -1 (initial ramp, calibration)
  localparam int RAMP_CELLS = 128;  // reference-column cells of weight +1 (ramp steps)
  localparam int MAG_W      = 3;    // magnitude bits of the largest (4-bit, sign-magnitude) weight

  localparam int VMAC_W = 10;              // holds +-ROWS units
  localparam int FRAC   = NI_MAX;          // fractional bits of the accumulator value
  localparam int VACC_W = VMAC_W + FRAC;   // accumulator value width
  localparam int VADC_W = 10;              // holds +-ROWS units

  typedef logic signed [VMAC_W-1:0] vmac_t;
  typedef logic signed [VACC_W-1:0] vacc_t;
  typedef logic signed [VADC_W-1:0] vadc_t;

  // Weight resolution selected by the configuration (Fig. 6 table).
  typedef enum logic [1:0] {
    W2B = 2'd0,   // ternary -1/0/+1, one cell per weight
    W3B = 2'd1,   // -3..+3, three cells per weight
    W4B = 2'd2    // -7..+7, seven cells per weight
  } wmode_e;

  // Content of one dual 8T bitcell: the storage nodes of its left and right 6T cells.
  // -1 = (VL low, VR high), 0 = (low, low), +1 = (VL high, VR low); (high, high) is not used.
  typedef struct packed {
    logic vl;
    logic vr;
  } cell_t;

  localparam cell_t CELL_POS  = '{vl: 1'b1, vr: 1'b0};
  localparam cell_t CELL_ZERO = '{vl: 1'b0, vr: 1'b0};
  localparam cell_t CELL_NEG  = '{vl: 1'b0, vr: 1'b1};

  // Macro configuration, latched by the controller when an operation starts.
  typedef struct packed {
    logic [2:0] ni;     // input bits, 1..7
    logic [2:0] no;     // output bits, 1..7
    wmode_e     wmode;  // weight resolution
  } cfg_t;

  // Phases of one MAC-and-convert operation.
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,
    ST_MAC   = 3'd1,  // one cycle per input bit: precharge, RWL pulse, charge sharing
    ST_CALIB = 3'd2,  // SADC high: precharge reference column, set the initial ramp voltage
    ST_RAMP  = 3'd3,  // 2^n_o ramp steps, one SA comparison per step
    ST_DONE  = 3'd4   // codes valid
  } state_e;

  function automatic int cells_per_weight(wmode_e m);
    case (m)
      W3B:     return 3;
      W4B:     return 7;
      default: return 1;
    endcase
  endfunction

endpackage
