// site2_compsub -- behavioural model of the SiTe CiM II comparator and current subtractor.
//
// Stands for an analog circuit. The sense comparator decides which global bitline carries more
// current and gives the sign S of the column output (S = +1 when I_RBL1 > I_RBL2, otherwise
// S = -1, as the paper states). The current subtractor, steered by the comparator outputs
// OUT/OUTB and enabled by EN, passes |I_RBL1 - I_RBL2|, a whole number of (I_LRS - I_HRS) units,
// on to the single current-mode ADC. Currents are represented by their unit counts n1/n2.
// With EN low the subtractor passes nothing (this design's choice). Combinational.
module site2_compsub
  import site_pkg::*;
#(
  parameter int unsigned CNT_W = SITE_CNT_W
) (
  input  logic             en,     // subtractor enable (EN)
  input  logic [CNT_W-1:0] n1,     // I_RBL1 in LRS units
  input  logic [CNT_W-1:0] n2,     // I_RBL2 in LRS units
  output logic             s_pos,  // comparator OUT: S = +1
  output logic [CNT_W-1:0] mag     // |I_RBL1 - I_RBL2| in units
);
  always_comb begin
    s_pos = (n1 > n2);
    if (!en)        mag = '0;
    else if (s_pos) mag = n1 - n2;   // OUT selects I_RBL1 - I_RBL2
    else            mag = n2 - n1;   // OUTB selects I_RBL2 - I_RBL1
  end
endmodule
