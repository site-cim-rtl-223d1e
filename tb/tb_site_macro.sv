// tb_site_macro -- one macro of each flavour (64 rows x 16 columns, 16 rows per access,
// 2 PCUs of 8 columns), driven the way the controller drives it: row writes, MAC accesses
// (step s applies input element g*4 + s to row s of group g; each access waits for pcu_ready)
// and single-row reads. Accumulated dot products and activations are checked against a
// reference that forms each access's +1/-1 product counts per column and applies the flavour's
// saturation rule; reads must return the written weights.
module tb_site_macro;
  import site_pkg::*;
  import site_ref_pkg::*;
  localparam int NR = 64, NC = 16, NA = 16, N_PCU = 2, ACC_W = 16, NRB = NR / NA;

  logic clk = 1'b0, rst_ni;
  logic wr_en, acc_en, rd_mode, sh_acc, acc_clr;
  logic [5:0] wr_row;
  logic [1:0] wr_w [NC];
  logic [1:0] in_vec [NR];
  logic [1:0] step;
  logic [3:0] rd_grp;
  logic [ACC_W-2:0] thr;
  logic rdy [2], bsy [2];
  logic signed [4:0] hold [2][NC];
  logic signed [ACC_W-1:0] acc [2][NC];
  logic [1:0] act [2][NC];
  int W [NR][NC];
  int I [NR];
  int model [2][NC];
  int checks = 0, failures = 0;

  site_macro #(.FLAVOR(SITE_I), .NR(NR), .NC(NC), .NA(NA), .N_PCU(N_PCU), .ACC_W(ACC_W)) u_m1 (
    .clk, .rst_ni, .wr_en, .wr_row, .wr_w, .in_vec, .acc_en, .step, .rd_mode, .rd_grp, .sh_acc,
    .acc_clr, .thr, .pcu_ready(rdy[0]), .pcu_busy(bsy[0]), .hold(hold[0]), .acc(acc[0]), .act(act[0]));
  site_macro #(.FLAVOR(SITE_II), .NR(NR), .NC(NC), .NA(NA), .N_PCU(N_PCU), .ACC_W(ACC_W)) u_m2 (
    .clk, .rst_ni, .wr_en, .wr_row, .wr_w, .in_vec, .acc_en, .step, .rd_mode, .rd_grp, .sh_acc,
    .acc_clr, .thr, .pcu_ready(rdy[1]), .pcu_busy(bsy[1]), .hold(hold[1]), .acc(acc[1]), .act(act[1]));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic write_all(int pz);
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_row = 6'(r);
      for (int j = 0; j < NC; j++) begin W[r][j] = tval(rand_trit(pz)); wr_w[j] = tcode(W[r][j]); end
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic mac(int pz, bit clr);
    int a, b, p;
    for (int r = 0; r < NR; r++) begin I[r] = tval(rand_trit(pz)); in_vec[r] = tcode(I[r]); end
    if (clr) begin
      @(negedge clk); acc_clr = 1'b1; @(negedge clk); acc_clr = 1'b0;
      for (int f = 0; f < 2; f++) for (int j = 0; j < NC; j++) model[f][j] = 0;
    end
    for (int s = 0; s < NRB; s++) begin
      @(negedge clk);
      while (!(rdy[0] && rdy[1])) @(negedge clk);
      acc_en = 1'b1; sh_acc = 1'b1; rd_mode = 1'b0; step = 2'(s);
      for (int j = 0; j < NC; j++) begin
        a = 0; b = 0;
        for (int g = 0; g < NA; g++) begin
          p = W[g*NRB + s][j] * I[g*NRB + s];
          a += (p == 1); b += (p == -1);
        end
        model[0][j] += col_ref(1'b0, a, b);
        model[1][j] += col_ref(1'b1, a, b);
      end
      @(negedge clk);
      acc_en = 1'b0; sh_acc = 1'b0;
    end
    while (bsy[0] || bsy[1]) @(negedge clk);
    thr = (ACC_W-1)'($urandom_range(6));
    #1;
    for (int f = 0; f < 2; f++)
      for (int j = 0; j < NC; j++) begin
        chk(int'(acc[f][j]) == model[f][j], f ? "acc flavour II" : "acc flavour I");
        chk(tval(act[f][j]) == ((model[f][j] > int'(thr)) ? 1 : (model[f][j] < -int'(thr)) ? -1 : 0), "act");
      end
  endtask

  task automatic read_row(int r);
    @(negedge clk);
    acc_en = 1'b1; rd_mode = 1'b1; sh_acc = 1'b0; rd_grp = 4'(r / NRB); step = 2'(r % NRB);
    @(negedge clk);
    acc_en = 1'b0; rd_mode = 1'b0;
    for (int f = 0; f < 2; f++)
      for (int j = 0; j < NC; j++) chk(int'(hold[f][j]) == W[r][j], "read data");
  endtask

  initial begin
    rst_ni = 1'b0; wr_en = 0; acc_en = 0; rd_mode = 0; sh_acc = 0; acc_clr = 0;
    wr_row = '0; step = '0; rd_grp = '0; thr = '0;
    for (int j = 0; j < NC; j++) wr_w[j] = '0;
    for (int r = 0; r < NR; r++) in_vec[r] = '0;
    repeat (3) @(negedge clk);
    rst_ni = 1'b1;
    for (int pass = 0; pass < 4; pass++) begin
      write_all(pass * 25);
      for (int k = 0; k < 6; k++) mac(k * 15, k % 3 == 0);
      for (int k = 0; k < 8; k++) read_row($urandom_range(NR - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
