// cha: behavioural model of the charge-sharing binary-weighted accumulator of one MAC column
// (an analog part: two equal capacitors C_X1, C_X2 and four switches S1, S2 on RBLL/RBLR).
//
// In every input-bit cycle C_X1 samples the differential MAC voltage of the column while S1
// is closed; then S1 opens and S2 closes, and C_X1 shares its charge with the equally sized
// C_X2. With equal capacitors the accumulated voltage becomes
//     V_Acc(i) = V_Acc(i-1)/2 + V_MAC(i)/2,
// which, with the input bits applied least significant first, weights bit i by 2^(i+1-n_i)
// relative to the last one: after n_i bits V_Acc = sum_i V_MAC(i) * 2^i / 2^n_i. Both capacitors
// are cleared before the first bit (rst_acc), as the paper assumes.
//
// Interface and timing: 'share' marks an input-bit cycle; sampling and sharing complete at
// its rising clock edge. vacc is a fixed-point number with FRAC fractional bits in units of
// one bitcell discharge, exact for up to FRAC input bits. The two-step S1/S2 switching inside
// the cycle is folded into that single edge; charge injection, kT/C noise and capacitor
// mismatch are not modelled.
module cha
  import cim_pkg::*;
(
  input  logic  clk,
  input  logic  rst_acc,  // clear C_X1 and C_X2
  input  logic  share,    // this cycle samples V_MAC (S1) and shares it with C_X2 (S2)
  input  vmac_t vmac,     // differential MAC voltage of the column
  output vacc_t vacc      // accumulated differential voltage V_Acc
);

  vacc_t sum;
  // One extra bit so the sum of two full-range values cannot overflow before halving.
  logic signed [VACC_W:0] sum_w;

  assign sum_w = {vacc[VACC_W-1], vacc} + ({{(VACC_W+1-VMAC_W){vmac[VMAC_W-1]}}, vmac} <<< FRAC);
  assign sum   = vacc_t'(sum_w >>> 1);

  always_ff @(posedge clk) begin
    if (rst_acc)    vacc <= '0;
    else if (share) vacc <= sum;
  end

endmodule
