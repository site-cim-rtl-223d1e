// tb_site2_subcol -- random check of a 16-cell SiTe CiM II sub-column. One row of the block
// is driven with a ternary input (row RWL plus RWL_t1 for +1 or RWL_t2 for -1); the expected
// LRS unit goes to RBL1 when the product of that row's weight and the input is +1, to RBL2 when
// it is -1, nowhere when it is 0. Cells of other rows must not matter.
module tb_site2_subcol;
  import site_ref_pkg::*;
  localparam int NRB = 16;
  logic [NRB-1:0] m1, m2, rwl;
  logic rwl_t1, rwl_t2, lrs1, lrs2;
  int checks = 0, failures = 0;
  int w [NRB];

  site2_subcol #(.NRB(NRB)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, in, p;
    for (int it = 0; it < 2000; it++) begin
      for (int k = 0; k < NRB; k++) begin
        w[k] = tval(rand_trit(30));
        {m2[k], m1[k]} = tcode(w[k]);
      end
      r  = $urandom_range(NRB - 1);
      in = tval(rand_trit(20));
      rwl = '0;
      rwl[r] = (in != 0);
      {rwl_t2, rwl_t1} = tcode(in);
      #1;
      p = w[r] * in;
      checks++;
      if (lrs1 !== (p == 1) || lrs2 !== (p == -1)) begin
        failures++;
        if (failures < 10) $display("FAIL row=%0d W=%0d I=%0d lrs1=%b lrs2=%b", r, w[r], in, lrs1, lrs2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
