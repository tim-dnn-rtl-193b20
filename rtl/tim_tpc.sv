// tim_tpc: read path of one Ternary Processing Cell (TPC).
//
// A TPC stores a ternary weight in two bits A and B (A=0: 0, A=1,B=0: +1,
// A=1,B=1: -1) and multiplies it by a ternary input applied on the two read
// wordlines (+1: WL_R1, -1: WL_R2). A product of +1 discharges BL by one
// step (Delta), a product of -1 discharges BLB, and 0 leaves both bitlines
// precharged. These encodings and the outcome table follow the paper; the
// circuit (two cross-coupled inverter pairs and read transistors) is reduced
// to its logic function. The two stored bits live in the tile's row array,
// which plays the part of the cell's write port. Purely combinational.
module tim_tpc (
  input  logic a,        // stored bit A
  input  logic b,        // stored bit B
  input  logic wlr1,     // read wordline 1 (input +1)
  input  logic wlr2,     // read wordline 2 (input -1)
  output logic dis_bl,   // BL discharged: product = +1
  output logic dis_blb   // BLB discharged: product = -1
);
  // W=+1 (b=0): WL_R1 pulls BL, WL_R2 pulls BLB; W=-1 (b=1): swapped.
  assign dis_bl  = a & ((~b & wlr1) | (b & wlr2));
  assign dis_blb = a & (( b & wlr1) | (~b & wlr2));
endmodule
