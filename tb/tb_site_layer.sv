// tb_site_layer -- workload test: a two-layer ternary fully-connected network run on the core
// tile by tile, the way a network larger than the arrays is mapped onto them. Reduced core:
// 2 arrays of 64 rows x 16 columns, 16 rows per access, 2 PCUs per array, built once in each
// flavour (SITE_I and SITE_II) and driven with the same weights.
//   Layer 1: 192 inputs -> 32 outputs. The 32 outputs are split over the two arrays (16 columns
//   each); the 192 inputs are split into three 64-row chunks. Per chunk the weight tile is
//   written into both arrays, then one MAC runs; the first MAC clears the accumulators and the
//   next two add to them, so the accumulators end with the full 192-term sums.
//   Layer 2: the 32 ternary activations of layer 1 (read from act_out, so each flavour feeds its
//   own) are the inputs of a 32 -> 16 layer in array 0, padded with zero inputs to 64 rows.
// Each flavour's accumulators and activations are checked against a reference that applies
// that flavour's per-access saturation rule, and the layer-1 sums are also compared with the
// exact dot products to count how many outputs saturation changed. Weights are 50% zero and
// inputs 40% zero, as in a sparse ternary network. The first 64 inputs and their weights are
// dense, and output 0's weights there equal the inputs, so saturation occurs in both flavours.
module tb_site_layer;
  import site_pkg::*;
  import site_ref_pkg::*;
  localparam int N_ARR = 2, NR = 64, NC = 16, NA = 16, N_PCU = 2, ACC_W = 16;
  localparam int NRB = NR / NA, COLS = NC / N_PCU;
  localparam int K1 = 192, M1 = N_ARR * NC, K2 = M1, M2 = NC;
  localparam int THR = 3;

  logic clk = 1'b0, rst_ni;
  logic cmd_valid;
  logic cmd_ready [2];
  site_cmd_t cmd;
  logic [1:0] wr_w [NC];
  logic [1:0] in_vec [2][N_ARR][NR];
  logic [ACC_W-2:0] thr;
  logic [$clog2(N_ARR)-1:0] acc_sel;
  logic signed [ACC_W-1:0] acc_row [2][NC];
  logic [1:0] rd_data [2][NC];
  logic [1:0] act_out [2][N_ARR][NC];
  logic done [2];

  site_cim_top #(.FLAVOR(SITE_I), .N_ARR(N_ARR), .NR(NR), .NC(NC), .NA(NA), .N_PCU(N_PCU), .ACC_W(ACC_W)) u_t1 (
    .clk, .rst_ni, .cmd_valid, .cmd_ready(cmd_ready[0]), .cmd, .wr_w, .in_vec(in_vec[0]), .thr, .acc_sel,
    .acc_row(acc_row[0]), .rd_data(rd_data[0]), .act_out(act_out[0]), .done(done[0]));
  site_cim_top #(.FLAVOR(SITE_II), .N_ARR(N_ARR), .NR(NR), .NC(NC), .NA(NA), .N_PCU(N_PCU), .ACC_W(ACC_W)) u_t2 (
    .clk, .rst_ni, .cmd_valid, .cmd_ready(cmd_ready[1]), .cmd, .wr_w, .in_vec(in_vec[1]), .thr, .acc_sel,
    .acc_row(acc_row[1]), .rd_data(rd_data[1]), .act_out(act_out[1]), .done(done[1]));

  always #5 clk = ~clk;

  int W1 [K1][M1];
  int W2 [K2][M2];
  int X1 [K1];
  int X2 [2][NR];             // layer-2 inputs per flavour, zero-padded
  int model [2][N_ARR][NC];   // saturating reference per flavour
  int exact [N_ARR][NC];      // exact layer-1 dot products
  int checks = 0, failures = 0;
  int n_sat [2] = '{0, 0};
  int n_changed [2] = '{0, 0};
  int n_act [3] = '{0, 0, 0};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run(op_e op, int arr, int row, bit clr);
    int lat;
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, arr: 8'(arr), row: 16'(row), clr: clr};
    chk(cmd_ready[0] && cmd_ready[1], "cores ready");
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 1;
    while (!done[0]) begin @(negedge clk); lat++; end
    chk(done[1], "cores in step");
    if (op == OP_MAC) chk(lat == NRB * COLS + 2, "MAC latency");
    else chk(lat == 2, "WRITE latency");
  endtask

  // one MAC over the currently loaded tiles; w(x, r, j) is the weight in array x, row r, column j
  task automatic mac_tile(int w [N_ARR][NR][NC], int xin [2][N_ARR][NR], bit clr);
    int a, b, p;
    if (clr) foreach (model[f, x, j]) model[f][x][j] = 0;
    for (int f = 0; f < 2; f++)
      for (int x = 0; x < N_ARR; x++)
        for (int r = 0; r < NR; r++) in_vec[f][x][r] = tcode(xin[f][x][r]);
    for (int f = 0; f < 2; f++)
      for (int x = 0; x < N_ARR; x++)
        for (int s = 0; s < NRB; s++)
          for (int j = 0; j < NC; j++) begin
            a = 0; b = 0;
            for (int g = 0; g < NA; g++) begin
              p = w[x][g*NRB + s][j] * xin[f][x][g*NRB + s];
              a += (p == 1); b += (p == -1);
            end
            model[f][x][j] += col_ref(f == 1, a, b);
            if (f == 0 && (a > 8 || b > 8)) n_sat[0]++;
            if (f == 1 && (a - b > 8 || b - a > 8)) n_sat[1]++;
          end
    run(OP_MAC, 0, 0, clr);
  endtask

  task automatic load_tile(int w [N_ARR][NR][NC], int n_arr);
    for (int x = 0; x < n_arr; x++)
      for (int r = 0; r < NR; r++) begin
        @(negedge clk);
        for (int j = 0; j < NC; j++) wr_w[j] = tcode(w[x][r][j]);
        run(OP_WRITE, x, r, 0);
      end
  endtask

  task automatic check_outputs(int n_arr, bit layer1);
    for (int x = 0; x < n_arr; x++) begin
      acc_sel = ($clog2(N_ARR))'(x);
      #1;
      for (int f = 0; f < 2; f++)
        for (int j = 0; j < NC; j++) begin
          int e;
          chk(int'(acc_row[f][j]) == model[f][x][j], f ? "accumulator SITE_II" : "accumulator SITE_I");
          e = (model[f][x][j] > THR) ? 1 : (model[f][x][j] < -THR) ? -1 : 0;
          chk(tval(act_out[f][x][j]) == e, "activation");
          n_act[e + 1]++;
          if (layer1 && model[f][x][j] != exact[x][j]) n_changed[f]++;
        end
    end
  endtask

  initial begin
    int wt [N_ARR][NR][NC];
    int xt [2][N_ARR][NR];
    rst_ni = 1'b0; cmd_valid = 1'b0; cmd = '0; thr = (ACC_W-1)'(THR); acc_sel = '0;
    for (int j = 0; j < NC; j++) wr_w[j] = '0;
    foreach (in_vec[f, x, r]) in_vec[f][x][r] = '0;
    foreach (W1[k, m]) W1[k][m] = tval(rand_trit(50));
    foreach (W2[k, m]) W2[k][m] = tval(rand_trit(50));
    // mostly sparse inputs, with a dense stretch so that some accesses saturate
    foreach (X1[k]) X1[k] = tval(rand_trit(k < 64 ? 0 : 40));
    // first-chunk weights dense, and output 0 matched to the dense inputs (every product +1)
    for (int k = 0; k < 64; k++)
      for (int m = 0; m < M1; m++) W1[k][m] = (m == 0) ? X1[k] : tval(rand_trit(0));
    foreach (exact[x, j]) begin
      exact[x][j] = 0;
      for (int k = 0; k < K1; k++) exact[x][j] += W1[k][x*NC + j] * X1[k];
    end
    repeat (3) @(negedge clk);
    rst_ni = 1'b1;

    // layer 1: three row chunks, the first MAC clears, the others accumulate
    for (int c = 0; c < K1 / NR; c++) begin
      foreach (wt[x, r, j]) wt[x][r][j] = W1[c*NR + r][x*NC + j];
      foreach (xt[f, x, r]) xt[f][x][r] = X1[c*NR + r];
      load_tile(wt, N_ARR);
      mac_tile(wt, xt, c == 0);
    end
    check_outputs(N_ARR, 1'b1);

    // layer 2: the activations of layer 1 become the inputs of array 0
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < NR; r++)
        X2[f][r] = (r < K2) ? tval(act_out[f][r / NC][r % NC]) : 0;
    foreach (wt[x, r, j]) wt[x][r][j] = (x == 0 && r < K2) ? W2[r][j] : 0;
    foreach (xt[f, x, r]) xt[f][x][r] = (x == 0) ? X2[f][r] : 0;
    load_tile(wt, 1);
    mac_tile(wt, xt, 1'b1);
    check_outputs(1, 1'b0);

    $display("layer1 saturating accesses I/II=%0d/%0d, outputs changed by saturation I/II=%0d/%0d, act(-1,0,+1)=%0d,%0d,%0d",
             n_sat[0], n_sat[1], n_changed[0], n_changed[1], n_act[0], n_act[1], n_act[2]);
    chk(n_sat[0] > 0 && n_sat[1] > 0, "saturation happened in both flavours");
    chk(n_act[0] > 0 && n_act[1] > 0 && n_act[2] > 0, "all activation values happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
