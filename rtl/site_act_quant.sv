// site_act_quant -- ternary quantizer / activation of a finished dot product.
//
// The paper only says that dot products are quantized and passed through an activation function
// to form the next layer's inputs. This design uses symmetric threshold ternarization:
// +1 when acc > thr, -1 when acc < -thr, 0 otherwise, with thr supplied at run time.
// Combinational.
module site_act_quant
  import site_pkg::*;
#(
  parameter int unsigned ACC_W = SITE_ACC_W
) (
  input  logic signed [ACC_W-1:0] acc,  // dot product
  input  logic        [ACC_W-2:0] thr,  // threshold, >= 0
  output logic        [1:0]       act   // ternary activation (trit_e code)
);
  logic signed [ACC_W-1:0] thr_s;
  always_comb begin
    thr_s = $signed({1'b0, thr});
    if (acc > thr_s)       act = TRIT_P;
    else if (acc < -thr_s) act = TRIT_N;
    else                   act = TRIT_Z;
  end
endmodule
