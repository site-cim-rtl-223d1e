// tb_site_full -- one complete operation of the core at its default size: 32 arrays of
// 256 x 256 ternary cells, SiTe CiM I flavour, 16 rows per access, 32 PCUs per array.
// Programs every row of every array (8192 row writes) with random ternary weights, reads back
// a few rows, then runs one MAC of a random input vector per array and checks all 8192 dot
// products and their ternary activations against a reference built from the +1/-1 product
// counts of each of the 16 accesses, with the SiTe CiM I saturation rule. Checks the MAC
// latency (16 accesses x 8 clocks + 2) and counts ADC saturations (must occur).
module tb_site_full;
  import site_pkg::*;
  import site_ref_pkg::*;
  localparam int N_ARR = 32, NR = 256, NC = 256, NA = 16, NRB = NR / NA, COLS = 8;

  logic clk = 1'b0, rst_ni;
  logic cmd_valid, cmd_ready;
  site_cmd_t cmd;
  logic [1:0] wr_w [NC];
  logic [1:0] in_vec [N_ARR][NR];
  logic [14:0] thr;
  logic [4:0] acc_sel;
  logic signed [15:0] acc_row [NC];
  logic [1:0] rd_data [NC];
  logic [1:0] act_out [N_ARR][NC];
  logic done;

  site_cim_top u_top (.*);

  always #5 clk = ~clk;

  byte W [N_ARR][NR][NC];
  byte I [N_ARR][NR];
  int checks = 0, failures = 0, n_sat = 0;

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run(op_e op, int arr, int row, bit clr, output int lat);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, arr: 8'(arr), row: 16'(row), clr: clr};
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  initial begin
    int lat, a, b, p, e;
    int model [NC];
    rst_ni = 1'b0; cmd_valid = 1'b0; cmd = '0; thr = 15'd4; acc_sel = '0;
    for (int j = 0; j < NC; j++) wr_w[j] = '0;
    foreach (in_vec[x, r]) in_vec[x][r] = '0;
    repeat (3) @(negedge clk);
    rst_ni = 1'b1;
    // program all weights; sparsity differs between arrays
    for (int x = 0; x < N_ARR; x++)
      for (int r = 0; r < NR; r++) begin
        for (int j = 0; j < NC; j++) begin
          W[x][r][j] = byte'(tval(rand_trit((x % 4) * 25)));
          wr_w[j] = tcode(W[x][r][j]);
        end
        run(OP_WRITE, x, r, 0, lat);
        chk(lat == 2, "WRITE latency");
      end
    $display("programmed %0d rows", N_ARR * NR);
    // read back some rows
    for (int k = 0; k < 8; k++) begin
      int x, r;
      x = $urandom_range(N_ARR - 1); r = $urandom_range(NR - 1);
      acc_sel = 5'(x);
      run(OP_READ, x, r, 0, lat);
      chk(lat == 2, "READ latency");
      for (int j = 0; j < NC; j++) chk(tval(rd_data[j]) == W[x][r][j], "read data");
    end
    // one MAC per array
    for (int x = 0; x < N_ARR; x++)
      for (int r = 0; r < NR; r++) begin
        I[x][r] = byte'(tval(rand_trit((x % 3) * 30)));
        in_vec[x][r] = tcode(I[x][r]);
      end
    run(OP_MAC, 0, 0, 1, lat);
    chk(lat == NRB * COLS + 2, "MAC latency");
    $display("MAC latency %0d clocks", lat);
    for (int x = 0; x < N_ARR; x++) begin
      for (int j = 0; j < NC; j++) model[j] = 0;
      for (int s = 0; s < NRB; s++)
        for (int j = 0; j < NC; j++) begin
          a = 0; b = 0;
          for (int g = 0; g < NA; g++) begin
            p = W[x][g*NRB + s][j] * I[x][g*NRB + s];
            a += (p == 1); b += (p == -1);
          end
          if (a > 8 || b > 8) n_sat++;
          model[j] += col_ref(1'b0, a, b);
        end
      acc_sel = 5'(x);
      #1;
      for (int j = 0; j < NC; j++) begin
        chk(int'(acc_row[j]) == model[j], "dot product");
        e = (model[j] > 4) ? 1 : (model[j] < -4) ? -1 : 0;
        chk(tval(act_out[x][j]) == e, "activation");
      end
    end
    $display("ADC saturations: %0d", n_sat);
    chk(n_sat > 0, "saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
