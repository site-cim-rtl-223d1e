// site1_cell -- behavioural model of the read/compute path of one SiTe CiM I ternary cell.
//
// Stands for a transistor circuit, not for logic gates: two storage bit cells M1/M2 each have
// a read access transistor (AX1, AX2, gated by RWL1) to their own read bitline RBL1/RBL2, and two
// cross-coupling transistors (AX3, AX4, gated by RWL2) connect M1 to RBL2 and M2 to RBL1. A bit
// cell that stores '1' (low-resistance state) behind an open access transistor discharges the
// bitline by one step. The outputs say which bitline this cell discharges; the array adds the
// steps of all activated cells of a column. With the weight code M1M2 = 10 (+1) / 01 (-1) and the
// input code RWL1/RWL2, RBL1 discharges for product +1 and RBL2 for product -1, matching the
// cell's truth table in the paper. Storage lives in the array's memory. Combinational.
module site1_cell (
  input  logic m1,    // bit stored in M1
  input  logic m2,    // bit stored in M2
  input  logic rwl1,  // read wordline 1 (AX1, AX2)
  input  logic rwl2,  // read wordline 2 (cross-coupling AX3, AX4)
  output logic dis1,  // one step of discharge on RBL1
  output logic dis2   // one step of discharge on RBL2
);
  always_comb begin
    // AX1: M1 -> RBL1, AX4: M2 -> RBL1
    dis1 = (rwl1 & m1) | (rwl2 & m2);
    // AX2: M2 -> RBL2, AX3: M1 -> RBL2
    dis2 = (rwl1 & m2) | (rwl2 & m1);
  end
endmodule
