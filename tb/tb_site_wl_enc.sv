// tb_site_wl_enc -- exhaustive check of the ternary input to wordline encoding.
// Expected levels come from the input tables: +1 raises RWL1/RWL_t1 and the row RWL,
// -1 raises RWL2/RWL_t2 and the row RWL, 0 (and the unused code) raises nothing.
module tb_site_wl_enc;
  logic [1:0] in_t;
  logic rwl_pos, rwl_neg, rwl_any;
  int checks = 0, failures = 0;

  site_wl_enc dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] exp;
    for (int c = 0; c < 4; c++) begin
      in_t = 2'(c);
      #1;
      case (c)
        1:       exp = 3'b101;  // {pos, neg, any}
        2:       exp = 3'b011;
        default: exp = 3'b000;
      endcase
      checks++;
      if ({rwl_pos, rwl_neg, rwl_any} !== exp) begin
        failures++;
        $display("FAIL in=%0d got %b exp %b", c, {rwl_pos, rwl_neg, rwl_any}, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
