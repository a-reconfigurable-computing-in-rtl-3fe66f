// dual8t_cell: behavioural model of the dual 8T SRAM bitcell (an analog part).
//
// Two 6T SRAM cells store one ternary weight on their internal nodes VL and VR. Each 6T cell
// has a two-transistor read path (M0 gated by the storage node, M1 gated by RWL) that pulls
// its read bit line (RBLL or RBLR) down when both gates are high. Following the truth table of
// the paper: with RWL high, weight +1 (VL high) discharges RBLL by one unit (+dV), weight -1
// (VR high) discharges RBLR (-dV) and weight 0 discharges neither (zero skipping); with RWL
// low nothing is discharged. The analog current is modelled as a one-unit discharge flag on
// each side; the read-word-line under-drive cascode only improves the linearity of that unit
// current and has no logic function here.
//
// Interface: a write port (wl, wdata) stored on the rising clock edge, standing in for the
// ordinary 6T write through WL/BLL/BLR, which the paper does not describe; a read word line rwl;
// the discharge flags dis_l and dis_r, combinational in rwl and the stored value.
module dual8t_cell
  import cim_pkg::*;
(
  input  logic  clk,
  input  logic  wl,      // write enable (word line)
  input  cell_t wdata,   // value written when wl is high
  input  logic  rwl,     // read word line: one bit of the input
  output cell_t stored,  // stored value, for read-back
  output logic  dis_l,   // one unit of discharge on RBLL
  output logic  dis_r    // one unit of discharge on RBLR
);

  cell_t q;

  always_ff @(posedge clk) begin
    if (wl) q <= wdata;
  end

  assign stored = q;
  // (high, high) is not a legal state; it is mapped to "no discharge" like weight 0.
  assign dis_l  = rwl &  q.vl & ~q.vr;
  assign dis_r  = rwl & ~q.vl &  q.vr;

endmodule
