// adc_ref_driver: word-line and precharge gating of the shared reference column.
//
// The enable signal SADC keeps MAC and ADC apart: the global precharge strobe and RWL
// pulse reach the reference column only while SADC is high (PCH_ADC and RP in the paper),
// and reach the MAC array only while it is low. While SADC is high:
//   * in the calibration cycle, the first 2^(n_o-1) cells of weight -1 (rows 0..) are
//     pulsed together to set the initial ramp voltage V_init;
//   * in ramp step k (k = 1 .. 2^n_o), one cell of weight +1, row INIT_CELLS + k - 1, is
//     pulsed, so the reference rises by one unit per step.
// The row layout (weight -1 rows below INIT_CELLS, +1 rows above) follows the paper's text
// (128 cells for the ramp, the rest for the initial voltage and calibration); the exact row
// of each step is this design's choice.
// Interface: pch and rwl_en are the controller's global strobes; calib and step say what the
// ADC phase is doing. Outputs: pch_mac/rwl_mac_en for the MAC side, pch_adc/ref_rwl for the
// reference column. Timing: combinational.
module adc_ref_driver
  import cim_pkg::*;
#(
  parameter int R     = ROWS,
  parameter int NINIT = INIT_CELLS
) (
  input  logic         sadc,        // ADC enable
  input  logic         pch,         // global precharge strobe
  input  logic         rwl_en,      // global RWL pulse
  input  logic         calib,       // calibration / initial-ramp cycle
  input  logic [7:0]   step,        // ramp step 1..2^n_o, 0 outside the ramp
  input  logic [2:0]   no,          // output resolution 1..7
  output logic         pch_mac,     // precharge of the MAC bit lines
  output logic         rwl_mac_en,  // RWL pulse of the MAC rows
  output logic         pch_adc,     // precharge of the reference column
  output logic [R-1:0] ref_rwl      // Ini / Rp word lines of the reference column
);

  logic [7:0] n_init;

  assign n_init     = 8'd1 << (no - 3'd1);
  assign pch_mac    = pch & ~sadc;
  assign rwl_mac_en = rwl_en & ~sadc;
  assign pch_adc    = pch & sadc;

  always_comb begin
    for (int r = 0; r < R; r++) begin
      if (r < NINIT) ref_rwl[r] = calib && (r < int'(n_init));
      else           ref_rwl[r] = !calib && (step != 8'd0) && (r == NINIT + int'(step) - 1);
      ref_rwl[r] = ref_rwl[r] & rwl_en & sadc;
    end
  end

endmodule
