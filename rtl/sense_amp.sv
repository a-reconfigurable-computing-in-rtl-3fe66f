// sense_amp: behavioural model of the double-differential sense amplifier of one column
// (an analog part).
//
// The amplifier compares the differential accumulated voltage V_Acc = +V_Acc - (-V_Acc) of
// its column with the differential ramp V_ADC = +V_ADC - (-V_ADC) delivered by the shared
// reference buffers. When enabled (SADC phase, one strobe per ramp step) its output V_ON is
// high in a cycle where V_Acc is above the reference, so a column sees one V_ON pulse for
// every ramp level below its V_Acc: a thermometer code in time. Disabled, V_ON is low.
// Each differential pair is passed as one signed number (its difference); vacc carries FRAC
// fractional bits, vadc is in whole units. OFFSET (in units of 2^-FRAC) models an input
// offset; it is 0 by default because the paper finds offset and noise far below one LSB.
// Timing: combinational; the counter behind it samples V_ON on the rising edge.
module sense_amp
  import cim_pkg::*;
#(
  parameter int OFFSET = 0
) (
  input  logic  en,    // SA enable (SADC)
  input  vacc_t vacc,  // +V_Acc - (-V_Acc)
  input  vadc_t vadc,  // +V_ADC - (-V_ADC)
  output logic  von    // V_ON
);

  logic signed [VACC_W+1:0] lhs, rhs;

  assign lhs = {{2{vacc[VACC_W-1]}}, vacc};
  assign rhs = ({{(VACC_W+2-VADC_W){vadc[VADC_W-1]}}, vadc} <<< FRAC) + (VACC_W+2)'(OFFSET);
  assign von = en && (lhs > rhs);

endmodule
