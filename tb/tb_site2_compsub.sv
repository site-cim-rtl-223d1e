// tb_site2_compsub -- exhaustive check of comparator sign (S = +1 only when I_RBL1 > I_RBL2)
// and subtractor magnitude |I_RBL1 - I_RBL2| for unit counts 0..16, enabled and disabled.
module tb_site2_compsub;
  logic en;
  logic [4:0] n1, n2, mag;
  logic s_pos;
  int checks = 0, failures = 0;

  site2_compsub #(.CNT_W(5)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int em;
    for (int e = 0; e < 2; e++)
      for (int x = 0; x <= 16; x++)
        for (int y = 0; y <= 16; y++) begin
          en = e[0]; n1 = 5'(x); n2 = 5'(y);
          #1;
          em = e ? ((x > y) ? x - y : y - x) : 0;
          checks++;
          if (s_pos !== (x > y) || int'(mag) != em) begin
            failures++;
            if (failures < 10) $display("FAIL en=%0d n1=%0d n2=%0d s=%b mag=%0d", e, x, y, s_pos, mag);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
