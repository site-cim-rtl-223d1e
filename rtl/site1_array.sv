// site1_array -- SiTe CiM I array: ternary weight storage with signed-ternary multiply-accumulate
// in the bitlines of every column.
//
// Every cell holds one ternary weight in two bit cells, M1M2 = 10 for +1, 01 for -1, 00 for 0.
// Rows are programmed whole: with wr_en high, row wr_row takes wr_w at the clock edge.
// A compute access applies one ternary input to one row of each of the NA groups of NR/NA rows
// (sel[g] picks the row inside group g, in_t[g] is its input). Each activated cell discharges
// RBL1 (product +1) or RBL2 (product -1) by one step through its direct or cross-coupled access
// transistors (site1_cell). Per column the steps on RBL1 and RBL2, a and b, go through two ADCs
// that saturate at 8, and a digital subtractor gives psum = min(a,8) - min(b,8) in -8..+8.
// psum is combinational in the access cycle; the PCUs sample it at the clock edge.
//
// Follows the paper: cell truth table, differential encodings, 256x256 array, 16 rows per access,
// two ADCs and a subtractor per column, saturation at 8. This design's own choices: one activated
// row per 16-row group (the paper lets SiTe CiM I activate any 16 rows), only the cells of the
// activated rows are instantiated per column (the others have both wordlines low and cannot
// discharge a bitline), reads are done as a single-row access with input +1, and bitlines are
// ideal step counters.
module site1_array
  import site_pkg::*;
#(
  parameter int unsigned NR = SITE_NR,  // rows
  parameter int unsigned NC = SITE_NC,  // columns
  parameter int unsigned NA = SITE_NA    // rows activated per access (= row groups)
) (
  input  logic                          clk,
  input  logic                          wr_en,          // program row wr_row
  input  logic [$clog2(NR)-1:0]         wr_row,
  input  logic [1:0]                    wr_w   [NC],    // ternary weights of the row
  input  logic [$clog2(NR/NA)-1:0]      sel    [NA],    // row inside each group
  input  logic [1:0]                    in_t   [NA],    // ternary input of each group's row
  output logic signed [PSUM_W-1:0]      psum   [NC]     // column outputs, -8..+8
);
  localparam int unsigned NRB = NR / NA;                    // rows per group
  localparam int unsigned CW  = $clog2(NA + 1);             // width of a step count

  // Weight storage: M1 and M2 planes, one word per row.
  logic [NC-1:0] m1_mem [NR];
  logic [NC-1:0] m2_mem [NR];
  logic [NC-1:0] wr_m1, wr_m2;

  always_comb begin
    for (int j = 0; j < NC; j++) begin
      wr_m1[j] = (wr_w[j] == TRIT_P);
      wr_m2[j] = (wr_w[j] == TRIT_N);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      m1_mem[wr_row] <= wr_m1;
      m2_mem[wr_row] <= wr_m2;
    end
  end

  // Activated row of each group and its wordlines.
  logic [NC-1:0] row_m1 [NA];
  logic [NC-1:0] row_m2 [NA];
  logic [NA-1:0] rwl1, rwl2;

  for (genvar g = 0; g < NA; g++) begin : g_grp
    logic [$clog2(NR)-1:0] ra;
    assign ra = $clog2(NR)'(g * NRB) + $clog2(NR)'(sel[g]);
    assign row_m1[g] = m1_mem[ra];
    assign row_m2[g] = m2_mem[ra];
    site_wl_enc u_wl (.in_t(in_t[g]), .rwl_pos(rwl1[g]), .rwl_neg(rwl2[g]), .rwl_any());
  end

  for (genvar j = 0; j < NC; j++) begin : g_col
    logic [NA-1:0] dis1, dis2;
    logic [CW-1:0] a_cnt, b_cnt;   // steps on RBL1, RBL2
    logic [3:0]    a_code, b_code;

    for (genvar g = 0; g < NA; g++) begin : g_cell
      site1_cell u_cell (
        .m1(row_m1[g][j]), .m2(row_m2[g][j]), .rwl1(rwl1[g]), .rwl2(rwl2[g]),
        .dis1(dis1[g]), .dis2(dis2[g])
      );
    end

    // Bitline: the activated cells' discharges add up.
    always_comb begin
      a_cnt = '0;
      b_cnt = '0;
      for (int g = 0; g < NA; g++) begin
        a_cnt = a_cnt + CW'(dis1[g]);
        b_cnt = b_cnt + CW'(dis2[g]);
      end
    end

    site_adc #(.CNT_W(CW)) u_adc1 (.cnt(a_cnt), .code(a_code));
    site_adc #(.CNT_W(CW)) u_adc2 (.cnt(b_cnt), .code(b_code));
    site_sub u_sub (.a(a_code), .b(b_code), .d(psum[j]));
  end

endmodule
