// tb_site_cim_top -- end-to-end test of the core in both flavours at reduced size: 2 arrays of
// 64 rows x 16 columns, 16 rows per access, 2 PCUs per array. The same command stream goes to
// a SITE_I core and a SITE_II core: row writes to every array, single-row reads, MAC commands
// that clear the accumulators and MAC commands that add on to them. Every dot product and
// activation is checked against a reference built from the +1/-1 product counts of each
// access, and the latencies (WRITE 2, READ 2, MAC 4*8+2 clocks) are checked.
// Mechanisms counted, each must occur: writes, reads, clearing MACs, accumulating MACs,
// ADC saturation in each flavour, negative comparator decisions in SITE_II, activations of
// each value, and accesses where the two flavours' saturation rules give different results.
module tb_site_cim_top;
  import site_pkg::*;
  import site_ref_pkg::*;
  localparam int N_ARR = 2, NR = 64, NC = 16, NA = 16, N_PCU = 2, ACC_W = 16;
  localparam int NRB = NR / NA, COLS = NC / N_PCU;

  logic clk = 1'b0, rst_ni;
  logic cmd_valid;
  logic cmd_ready [2];
  site_cmd_t cmd;
  logic [1:0] wr_w [NC];
  logic [1:0] in_vec [N_ARR][NR];
  logic [ACC_W-2:0] thr;
  logic [$clog2(N_ARR)-1:0] acc_sel;
  logic signed [ACC_W-1:0] acc_row [2][NC];
  logic [1:0] rd_data [2][NC];
  logic [1:0] act_out [2][N_ARR][NC];
  logic done [2];

  site_cim_top #(.FLAVOR(SITE_I), .N_ARR(N_ARR), .NR(NR), .NC(NC), .NA(NA), .N_PCU(N_PCU), .ACC_W(ACC_W)) u_t1 (
    .clk, .rst_ni, .cmd_valid, .cmd_ready(cmd_ready[0]), .cmd, .wr_w, .in_vec, .thr, .acc_sel,
    .acc_row(acc_row[0]), .rd_data(rd_data[0]), .act_out(act_out[0]), .done(done[0]));
  site_cim_top #(.FLAVOR(SITE_II), .N_ARR(N_ARR), .NR(NR), .NC(NC), .NA(NA), .N_PCU(N_PCU), .ACC_W(ACC_W)) u_t2 (
    .clk, .rst_ni, .cmd_valid, .cmd_ready(cmd_ready[1]), .cmd, .wr_w, .in_vec, .thr, .acc_sel,
    .acc_row(acc_row[1]), .rd_data(rd_data[1]), .act_out(act_out[1]), .done(done[1]));

  always #5 clk = ~clk;

  int W [N_ARR][NR][NC];
  int model [2][N_ARR][NC];
  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_mac_clr = 0, n_mac_add = 0;
  int n_sat [2] = '{0, 0};
  int n_neg2 = 0, n_flav_diff = 0;
  int n_act [3] = '{0, 0, 0};

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // send one command to both cores, return latency from acceptance to done
  task automatic run(op_e op, int arr, int row, bit clr, output int lat);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, arr: 8'(arr), row: 16'(row), clr: clr};
    chk(cmd_ready[0] && cmd_ready[1], "cores ready");
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 1;
    while (!done[0]) begin
      chk(!done[1], "cores in step");
      @(negedge clk);
      lat++;
    end
    chk(done[1], "cores in step");
  endtask

  task automatic write_row(int a, int r, int pz);
    int lat;
    for (int j = 0; j < NC; j++) begin W[a][r][j] = tval(rand_trit(pz)); end
    @(negedge clk);
    for (int j = 0; j < NC; j++) wr_w[j] = tcode(W[a][r][j]);
    run(OP_WRITE, a, r, 0, lat);
    chk(lat == 2, "WRITE latency");
    n_write++;
  endtask

  task automatic read_row(int a, int r);
    int lat;
    acc_sel = ($clog2(N_ARR))'(a);
    run(OP_READ, a, r, 0, lat);
    chk(lat == 2, "READ latency");
    for (int f = 0; f < 2; f++)
      for (int j = 0; j < NC; j++) chk(tval(rd_data[f][j]) == W[a][r][j], "read data");
    n_read++;
  endtask

  task automatic mac(int pz, bit clr);
    int lat, a, b, p, r1, r2;
    int I [N_ARR][NR];
    for (int x = 0; x < N_ARR; x++)
      for (int r = 0; r < NR; r++) begin I[x][r] = tval(rand_trit(pz)); in_vec[x][r] = tcode(I[x][r]); end
    if (clr) foreach (model[f, x, j]) model[f][x][j] = 0;
    for (int x = 0; x < N_ARR; x++)
      for (int s = 0; s < NRB; s++)
        for (int j = 0; j < NC; j++) begin
          a = 0; b = 0;
          for (int g = 0; g < NA; g++) begin
            p = W[x][g*NRB + s][j] * I[x][g*NRB + s];
            a += (p == 1); b += (p == -1);
          end
          r1 = col_ref(1'b0, a, b);
          r2 = col_ref(1'b1, a, b);
          model[0][x][j] += r1;
          model[1][x][j] += r2;
          if (a > 8 || b > 8) n_sat[0]++;
          if (a - b > 8 || b - a > 8) n_sat[1]++;
          if (r2 < 0) n_neg2++;
          if (r1 != r2) n_flav_diff++;
        end
    thr = (ACC_W-1)'($urandom_range(5));
    run(OP_MAC, 0, 0, clr, lat);
    chk(lat == NRB * COLS + 2, "MAC latency");
    if (clr) n_mac_clr++; else n_mac_add++;
    for (int x = 0; x < N_ARR; x++) begin
      acc_sel = ($clog2(N_ARR))'(x);
      #1;
      for (int f = 0; f < 2; f++)
        for (int j = 0; j < NC; j++) begin
          int e;
          chk(int'(acc_row[f][j]) == model[f][x][j], f ? "dot product SITE_II" : "dot product SITE_I");
          e = (model[f][x][j] > int'(thr)) ? 1 : (model[f][x][j] < -int'(thr)) ? -1 : 0;
          chk(tval(act_out[f][x][j]) == e, "activation");
          n_act[e + 1]++;
        end
    end
  endtask

  initial begin
    rst_ni = 1'b0; cmd_valid = 1'b0; cmd = '0; thr = '0; acc_sel = '0;
    for (int j = 0; j < NC; j++) wr_w[j] = '0;
    foreach (in_vec[x, r]) in_vec[x][r] = '0;
    repeat (3) @(negedge clk);
    rst_ni = 1'b1;
    for (int pass = 0; pass < 3; pass++) begin
      for (int x = 0; x < N_ARR; x++)
        for (int r = 0; r < NR; r++) write_row(x, r, pass * 30);
      for (int k = 0; k < 6; k++) read_row($urandom_range(N_ARR - 1), $urandom_range(NR - 1));
      for (int k = 0; k < 5; k++) mac(k * 20, k != 1 && k != 3);
      // overwrite a few rows and read them back
      for (int k = 0; k < 4; k++) begin
        int x, r;
        x = $urandom_range(N_ARR - 1); r = $urandom_range(NR - 1);
        write_row(x, r, 10);
        read_row(x, r);
      end
    end
    $display("writes=%0d reads=%0d mac_clear=%0d mac_accumulate=%0d sat_I=%0d sat_II=%0d neg_sign_II=%0d flavour_differs=%0d act(-1,0,+1)=%0d,%0d,%0d",
             n_write, n_read, n_mac_clr, n_mac_add, n_sat[0], n_sat[1], n_neg2, n_flav_diff, n_act[0], n_act[1], n_act[2]);
    chk(n_write > 0, "write happened");
    chk(n_read > 0, "read happened");
    chk(n_mac_clr > 0, "clearing MAC happened");
    chk(n_mac_add > 0, "accumulating MAC happened");
    chk(n_sat[0] > 0, "SITE_I saturation happened");
    chk(n_sat[1] > 0, "SITE_II saturation happened");
    chk(n_neg2 > 0, "SITE_II negative sign happened");
    chk(n_flav_diff > 0, "flavours differed");
    chk(n_act[0] > 0 && n_act[1] > 0 && n_act[2] > 0, "all activation values happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
