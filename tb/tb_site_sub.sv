// tb_site_sub -- exhaustive check of a - b for ADC codes 0..8.
module tb_site_sub;
  logic [3:0] a, b;
  logic signed [4:0] d;
  int checks = 0, failures = 0;

  site_sub dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x <= 8; x++)
      for (int y = 0; y <= 8; y++) begin
        a = 4'(x); b = 4'(y);
        #1;
        checks++;
        if (int'(d) != x - y) begin
          failures++;
          $display("FAIL %0d-%0d=%0d", x, y, d);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
