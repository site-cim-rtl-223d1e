// tb_site_adc -- exhaustive check of the ADC transfer: counts 0..7 pass, 8 and above read 8.
module tb_site_adc;
  logic [4:0] cnt;
  logic [3:0] code;
  int checks = 0, failures = 0;

  site_adc #(.CNT_W(5)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 32; c++) begin
      cnt = 5'(c);
      #1;
      checks++;
      if (int'(code) != ((c > 8) ? 8 : c)) begin
        failures++;
        $display("FAIL cnt=%0d code=%0d", c, code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
