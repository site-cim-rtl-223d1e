// tb_site1_cell -- checks the SiTe CiM I cell against the ternary product for all nine
// weight/input pairs (RBL1 discharges for product +1, RBL2 for product -1, neither for 0),
// plus the switch-level behaviour of the two unused codes.
module tb_site1_cell;
  import site_ref_pkg::*;
  logic m1, m2, rwl1, rwl2, dis1, dis2;
  int checks = 0, failures = 0;

  site1_cell dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = -1; w <= 1; w++)
      for (int i = -1; i <= 1; i++) begin
        {m2, m1}     = tcode(w);
        {rwl2, rwl1} = tcode(i);
        #1;
        checks++;
        if (dis1 !== (w * i == 1) || dis2 !== (w * i == -1)) begin
          failures++;
          $display("FAIL W=%0d I=%0d dis1=%b dis2=%b", w, i, dis1, dis2);
        end
      end
    // both bits stored, RWL2 only: cross-coupled paths discharge both bitlines
    {m2, m1} = 2'b11; {rwl2, rwl1} = 2'b10; #1;
    checks++;
    if (!(dis1 && dis2)) begin failures++; $display("FAIL cross paths"); end
    // M1 stored, both wordlines: RBL1 via AX1 and RBL2 via AX3
    {m2, m1} = 2'b01; {rwl2, rwl1} = 2'b11; #1;
    checks++;
    if (!(dis1 && dis2)) begin failures++; $display("FAIL both wordlines"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
