// tb_site2_array -- SiTe CiM II array at 64 rows x 16 columns, 16 rows per access (blocks of 4 rows).
// Writes random ternary weights (several sparsity levels), then applies random accesses: one
// row per group with a random ternary input. For every column the expected output counts the
// +1 and -1 products of the activated rows and applies the SiTe CiM II rule S * min(|a-b|,8), S = +1 only when a > b.
// Dense accesses make differences above 8 occur; the test counts them and fails if none happened.
// Also checks that an access with all inputs zero gives 0 and that a single-row access with
// input +1 reads the stored weights back.
module tb_site2_array;
  import site_ref_pkg::*;
  localparam int NR = 64, NC = 16, NA = 16, NRB = NR / NA;
  localparam bit FLAVOR2 = 1'b1;

  logic clk = 1'b0;
  logic wr_en;
  logic [$clog2(NR)-1:0] wr_row;
  logic [1:0] wr_w [NC];
  logic [$clog2(NRB)-1:0] sel [NA];
  logic [1:0] in_t [NA];
  logic signed [4:0] psum [NC];
  int W [NR][NC];
  int checks = 0, failures = 0, sat_events = 0;

  site2_array #(.NR(NR), .NC(NC), .NA(NA)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all(int pz);
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_row = ($clog2(NR))'(r);
      for (int j = 0; j < NC; j++) begin
        W[r][j] = tval(rand_trit(pz));
        wr_w[j] = tcode(W[r][j]);
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic access_check(int pz, bit single);
    int I [NA];
    int s [NA];
    int a, b, p, e;
    int one;
    @(negedge clk);
    one = $urandom_range(NA - 1);
    for (int g = 0; g < NA; g++) begin
      s[g] = $urandom_range(NRB - 1);
      I[g] = single ? ((g == one) ? 1 : 0) : tval(rand_trit(pz));
      sel[g] = ($clog2(NRB))'(s[g]);
      in_t[g] = tcode(I[g]);
    end
    #1;
    for (int j = 0; j < NC; j++) begin
      a = 0; b = 0;
      for (int g = 0; g < NA; g++) begin
        p = W[g*NRB + s[g]][j] * I[g];
        if (p == 1) a++;
        if (p == -1) b++;
      end
      if ((!FLAVOR2 && (a > 8 || b > 8)) || (FLAVOR2 && (a - b > 8 || b - a > 8))) sat_events++;
      e = col_ref(FLAVOR2, a, b);
      if (single) e = W[one*NRB + s[one]][j];
      checks++;
      if (int'(psum[j]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL col %0d a=%0d b=%0d got %0d exp %0d", j, a, b, psum[j], e);
      end
    end
  endtask

  initial begin
    wr_en = 1'b0; wr_row = '0;
    for (int j = 0; j < NC; j++) wr_w[j] = 2'b00;
    for (int g = 0; g < NA; g++) begin sel[g] = '0; in_t[g] = 2'b00; end
    foreach (W[r, j]) W[r][j] = 0;
    for (int pass = 0; pass < 3; pass++) begin
      write_all(pass == 0 ? 0 : pass == 1 ? 30 : 70);
      for (int k = 0; k < 200; k++) access_check(k % 4 == 0 ? 0 : 40, 1'b0);
      for (int k = 0; k < 20; k++)  access_check(100, 1'b0);   // all inputs zero
      for (int k = 0; k < 50; k++)  access_check(0, 1'b1);     // single-row read
    end
    checks++;
    if (sat_events == 0) begin failures++; $display("FAIL no saturation case reached"); end
    $display("saturation cases: %0d", sat_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
