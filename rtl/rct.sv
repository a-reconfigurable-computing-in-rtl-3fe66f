// rct: per-column ripple counter that turns the sense amplifier's thermometer-in-time output
// into a binary ADC code.
//
// During the ramp the sense amplifier pulses V_ON once for every ramp level below the
// column's accumulated voltage; counting those pulses gives the code directly, so no
// register array has to store the thermometer code (paper, Sec. III-D, and Fig. 3(c), where
// two V_ON pulses give the output 10).
// This design counts synchronously: V_ON is sampled as a count enable on the rising clock
// edge instead of clocking a chain of toggle flip-flops, which gives the same count in a
// single-clock design. The paper's ramp has 2^n_o steps, one more than an n_o-bit code can
// hold, so the counter holds at 2^n_o - 1 (this design's choice; the paper does not say
// what the counter does when all steps fire).
// Interface: clr clears the count at the start of an operation; inc is V_ON of this cycle;
// no sets the output resolution; code holds the result until the next clr.
module rct
  import cim_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              inc,
  input  logic [2:0]        no,    // output resolution, 1..7
  output logic [NO_MAX-1:0] code
);

  logic [NO_MAX-1:0] max_code;

  assign max_code = NO_MAX'((8'd1 << no) - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       code <= '0;
    else if (clr)                     code <= '0;
    else if (inc && code != max_code) code <= code + 1'b1;
  end

endmodule
