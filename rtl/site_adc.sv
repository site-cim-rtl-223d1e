// site_adc -- behavioural model of the column ADC: a 3-bit flash converter plus one extra
// sense amplifier for the value 8.
//
// Stands for an analog converter. Its input is the ideal number of unit steps on the bitline
// (voltage steps of an RBL in SiTe CiM I, subtracted current units in SiTe CiM II) rather than a
// voltage or current. Seven comparators form the thermometer code of the 3-bit flash ADC
// (levels 1..7); their ones are counted into 3 bits. The extra sense amplifier fires at level 8
// and then forces the output to 8, so every count from 8 up to the 16 activated rows reads as 8,
// as the paper prescribes. Bitline non-linearity and sensing errors are not modelled.
// Combinational.
module site_adc
  import site_pkg::*;
#(
  parameter int unsigned CNT_W = SITE_CNT_W  // width of the step count
) (
  input  logic [CNT_W-1:0] cnt,   // unit steps on the bitline
  output logic [3:0]       code   // 0..8
);
  logic [6:0] therm;  // flash comparators, therm[k] = level k+1 reached
  logic       sa8;    // extra sense amplifier, level 8 reached
  logic [2:0] bin;

  always_comb begin
    for (int k = 0; k < 7; k++) therm[k] = (cnt > CNT_W'(k));
    sa8 = (cnt > CNT_W'(7));
    bin = '0;
    for (int k = 0; k < 7; k++) bin = bin + 3'(therm[k]);
    code = sa8 ? 4'(SITE_ADC_MAX) : {1'b0, bin};
  end
endmodule
