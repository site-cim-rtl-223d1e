// site2_subcol -- behavioural model of one 16-cell sub-column of a SiTe CiM II block.
//
// Stands for a transistor circuit. Each of the NRB cells has read access transistors (gated by
// its row wordline RWL_i) from M1 to the local bitline LRBL1 and from M2 to LRBL2. Four
// transistors shared by the sub-column join the local bitlines to the column's global bitlines:
// with RWL_t1, LRBL1 -> RBL1 and LRBL2 -> RBL2 (straight, input +1); with RWL_t2, LRBL1 -> RBL2
// and LRBL2 -> RBL1 (crossed, input -1). Output lrs1/lrs2 says the low-resistance current unit
// I_LRS flows into RBL1/RBL2. The high-resistance current I_HRS is not output: every active
// sub-column puts exactly one unit (LRS or HRS) on each global bitline, so it cancels in the
// RBL1 - RBL2 subtraction. Only one row of a block may be read at a time and RWL_t1/RWL_t2 are
// exclusive; assertions check both. Combinational.
module site2_subcol #(
  parameter int unsigned NRB = 16  // cells per sub-column (rows per block)
) (
  input  logic [NRB-1:0] m1,      // M1 bits of the cells
  input  logic [NRB-1:0] m2,      // M2 bits of the cells
  input  logic [NRB-1:0] rwl,     // row read wordlines of the block
  input  logic           rwl_t1,  // shared straight connection
  input  logic           rwl_t2,  // shared crossed connection
  output logic           lrs1,    // I_LRS on RBL1
  output logic           lrs2     // I_LRS on RBL2
);
  logic lrbl1, lrbl2;  // a conducting LRS path exists on the local bitline

  always_comb begin
    lrbl1 = |(rwl & m1);
    lrbl2 = |(rwl & m2);
    lrs1  = (rwl_t1 & lrbl1) | (rwl_t2 & lrbl2);  // AX_t1M1, AX_t2M2
    lrs2  = (rwl_t1 & lrbl2) | (rwl_t2 & lrbl1);  // AX_t1M2, AX_t2M1
  end

  always_comb begin
    assert (!(rwl_t1 && rwl_t2)) else $error("site2_subcol: RWL_t1 and RWL_t2 both high");
    assert ($onehot0(rwl)) else $error("site2_subcol: more than one row of a block read at once");
  end
endmodule
