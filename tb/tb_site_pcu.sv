// tb_site_pcu -- PCU with 8 columns. Feeds random column outputs (-8..8) as accesses, issued
// as soon as ready allows, and checks: the held values, that an access is absorbed in exactly
// 8 clocks (ready comes back in the 8th clock after the sample), the accumulators against a
// running sum, the ternary activations for a random threshold, sample-only loads (no
// accumulation) and clearing.
module tb_site_pcu;
  import site_ref_pkg::*;
  localparam int COLS = 8, ACC_W = 16;
  logic clk = 1'b0, rst_ni;
  logic sh_load, sh_acc, acc_clr, ready, busy;
  logic signed [4:0] psum_in [COLS];
  logic [ACC_W-2:0] thr;
  logic signed [4:0] hold [COLS];
  logic signed [ACC_W-1:0] acc [COLS];
  logic [1:0] act [COLS];
  int model [COLS];
  int held [COLS];
  int checks = 0, failures = 0;

  site_pcu #(.COLS(COLS), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic check_acc();
    int e;
    for (int c = 0; c < COLS; c++) begin
      chk(int'(acc[c]) == model[c], "accumulator");
      e = (model[c] > int'(thr)) ? 1 : (model[c] < -int'(thr)) ? -1 : 0;
      chk(tval(act[c]) == e, "activation");
    end
  endtask

  initial begin
    int lat;
    rst_ni = 1'b0; sh_load = 1'b0; sh_acc = 1'b0; acc_clr = 1'b0; thr = '0;
    for (int c = 0; c < COLS; c++) begin psum_in[c] = '0; model[c] = 0; end
    repeat (3) @(negedge clk);
    rst_ni = 1'b1;
    @(negedge clk);
    check_acc();
    chk(ready && !busy, "idle after reset");
    for (int round = 0; round < 40; round++) begin
      thr = (ACC_W-1)'($urandom_range(20));
      // 16 back-to-back accesses, as in one MAC
      for (int k = 0; k < 16; k++) begin
        while (!ready) @(negedge clk);
        for (int c = 0; c < COLS; c++) begin
          held[c] = $urandom_range(16) - 8;
          psum_in[c] = 5'(held[c]);
        end
        sh_load = 1'b1; sh_acc = 1'b1;
        @(negedge clk);
        sh_load = 1'b0; sh_acc = 1'b0;
        for (int c = 0; c < COLS; c++) chk(int'(hold[c]) == held[c], "hold");
        lat = 1;
        while (!ready) begin @(negedge clk); lat++; end
        chk(lat == COLS, "access absorbed in COLS clocks");
        for (int c = 0; c < COLS; c++) model[c] += held[c];
      end
      @(negedge clk);
      chk(!busy, "idle after last column");
      check_acc();
      // sample only: hold changes, accumulators do not
      for (int c = 0; c < COLS; c++) psum_in[c] = 5'($urandom_range(16) - 8);
      sh_load = 1'b1;
      @(negedge clk);
      sh_load = 1'b0;
      repeat (COLS + 1) @(negedge clk);
      for (int c = 0; c < COLS; c++) chk(hold[c] == psum_in[c], "sample-only hold");
      check_acc();
      if (round % 5 == 4) begin
        acc_clr = 1'b1;
        @(negedge clk);
        acc_clr = 1'b0;
        for (int c = 0; c < COLS; c++) model[c] = 0;
        check_acc();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
