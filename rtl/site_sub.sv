// site_sub -- digital subtractor of a SiTe CiM I column.
//
// The two ADCs of a column give a (steps on RBL1, products +1) and b (steps on RBL2, products
// -1); the column's dot product is a - b. The paper calls it a 3-bit subtractor, but a and b
// reach 8, so the operands here are 4-bit unsigned and the result is 5-bit two's complement
// (-8..+8). Combinational.
module site_sub (
  input  logic [3:0]        a,  // ADC code of RBL1
  input  logic [3:0]        b,  // ADC code of RBL2
  output logic signed [4:0] d   // a - b
);
  always_comb d = $signed({1'b0, a}) - $signed({1'b0, b});
endmodule
