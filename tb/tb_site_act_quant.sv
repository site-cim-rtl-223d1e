// tb_site_act_quant -- random and edge checks of the threshold ternarization.
module tb_site_act_quant;
  import site_ref_pkg::*;
  logic signed [15:0] acc;
  logic [14:0] thr;
  logic [1:0] act;
  int checks = 0, failures = 0;

  site_act_quant #(.ACC_W(16)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int a, int t);
    int e;
    acc = 16'(a); thr = 15'(t);
    #1;
    e = (a > t) ? 1 : (a < -t) ? -1 : 0;
    checks++;
    if (tval(act) != e || act == 2'b11) begin
      failures++;
      if (failures < 10) $display("FAIL acc=%0d thr=%0d act=%b", a, t, act);
    end
  endtask

  initial begin
    for (int t = 0; t < 4; t++)
      for (int a = -6; a <= 6; a++) check(a, t);
    for (int it = 0; it < 1000; it++)
      check($signed(16'($urandom_range(65535))) , int'($urandom_range(200)));
    check(32767, 32767);
    check(-32768, 32767);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
