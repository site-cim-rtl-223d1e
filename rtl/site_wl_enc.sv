// site_wl_enc -- ternary input to read-wordline encoder.
//
// Turns one ternary input element into the read-wordline levels that apply it to a row.
// For the per-cell cross-coupled flavour (SiTe CiM I):  +1 -> RWL1, -1 -> RWL2, 0 -> neither.
// For the shared sub-column flavour (SiTe CiM II): the row wordline RWL is raised for +1 and -1,
// and the shared RWL_t1 / RWL_t2 of the block pick straight (+1) or crossed (-1) connection to
// the global bitlines. rwl_pos therefore serves as RWL1 or RWL_t1, rwl_neg as RWL2 or RWL_t2,
// rwl_any as the row RWL. The levels follow the paper's input-encoding tables; the unused
// code 2'b11 is treated as 0 (this design's choice). Purely combinational.
module site_wl_enc
  import site_pkg::*;
(
  input  logic [1:0] in_t,     // ternary input (trit_e code)
  output logic       rwl_pos,  // RWL1 (CiM I) / RWL_t1 (CiM II)
  output logic       rwl_neg,  // RWL2 (CiM I) / RWL_t2 (CiM II)
  output logic       rwl_any   // row RWL (CiM II)
);
  always_comb begin
    rwl_pos = (in_t == TRIT_P);
    rwl_neg = (in_t == TRIT_N);
    rwl_any = rwl_pos | rwl_neg;
  end
endmodule
