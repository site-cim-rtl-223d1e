// site2_array -- SiTe CiM II array: ternary weight storage with signed-ternary multiply-accumulate
// through cross-coupling transistors shared by each 16-cell sub-column.
//
// The NR rows form NA blocks of NR/NA rows. Every column of a block is a sub-column
// (site2_subcol) with local bitlines LRBL1/LRBL2 and four shared transistors that join them to
// the global bitlines RBL1/RBL2 straight (RWL_t1, input +1) or crossed (RWL_t2, input -1).
// Weights use the same M1/M2 encoding and row write as site1_array. A compute access reads one
// row per block: sel[g] picks the row of block g (its RWL), in_t[g] its input. Per column the
// LRS current units on RBL1 and RBL2, n1 and n2, go to a comparator (sign S = +1 if n1 > n2,
// else -1) and a current subtractor (|n1 - n2|), then to one ADC that saturates at 8:
// psum = S * min(|n1 - n2|, 8). Unlike SiTe CiM I, the subtraction comes before the ADC, so
// saturation applies to the difference. psum is combinational in the access cycle.
//
// Follows the paper: block/sub-column structure and connections, encodings, 256x256 array with
// 16 blocks, comparator + subtractor + single ADC per column, saturation at 8. This design's own
// choices: currents are ideal unit counts, reads are a single-row access with input +1, and the
// subtractor is enabled whenever any block is driven.
module site2_array
  import site_pkg::*;
#(
  parameter int unsigned NR = SITE_NR,  // rows
  parameter int unsigned NC = SITE_NC,  // columns
  parameter int unsigned NA = SITE_NA    // blocks = rows activated per access
) (
  input  logic                          clk,
  input  logic                          wr_en,          // program row wr_row
  input  logic [$clog2(NR)-1:0]         wr_row,
  input  logic [1:0]                    wr_w   [NC],    // ternary weights of the row
  input  logic [$clog2(NR/NA)-1:0]      sel    [NA],    // row inside each block
  input  logic [1:0]                    in_t   [NA],    // ternary input of each block's row
  output logic signed [PSUM_W-1:0]      psum   [NC]     // column outputs, -8..+8
);
  localparam int unsigned NRB = NR / NA;         // rows per block
  localparam int unsigned CW  = $clog2(NA + 1);  // width of a unit count

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

  // Wordlines of each block: one-hot row RWL, shared RWL_t1 / RWL_t2.
  logic [NRB-1:0] rwl [NA];
  logic [NA-1:0]  rwl_t1, rwl_t2, rwl_on;

  for (genvar g = 0; g < NA; g++) begin : g_blk
    site_wl_enc u_wl (.in_t(in_t[g]), .rwl_pos(rwl_t1[g]), .rwl_neg(rwl_t2[g]), .rwl_any(rwl_on[g]));
    always_comb begin
      rwl[g] = '0;
      rwl[g][sel[g]] = rwl_on[g];
    end
  end

  // Cell bits of every sub-column: blk_m1[g][j] holds column j of the rows of block g.
  logic [NRB-1:0] blk_m1 [NA][NC];
  logic [NRB-1:0] blk_m2 [NA][NC];

  always_comb begin
    for (int g = 0; g < NA; g++)
      for (int r = 0; r < NRB; r++)
        for (int j = 0; j < NC; j++) begin
          blk_m1[g][j][r] = m1_mem[g*NRB + r][j];
          blk_m2[g][j][r] = m2_mem[g*NRB + r][j];
        end
  end

  logic sub_en;
  assign sub_en = |rwl_on;

  for (genvar j = 0; j < NC; j++) begin : g_col
    logic [NA-1:0] lrs1, lrs2;
    logic [CW-1:0] n1, n2, mag;
    logic          s_pos;
    logic [3:0]    code;

    for (genvar g = 0; g < NA; g++) begin : g_sub
      site2_subcol #(.NRB(NRB)) u_sub (
        .m1(blk_m1[g][j]), .m2(blk_m2[g][j]), .rwl(rwl[g]),
        .rwl_t1(rwl_t1[g]), .rwl_t2(rwl_t2[g]), .lrs1(lrs1[g]), .lrs2(lrs2[g])
      );
    end

    // Global bitlines: the LRS units of all blocks add up.
    always_comb begin
      n1 = '0;
      n2 = '0;
      for (int g = 0; g < NA; g++) begin
        n1 = n1 + CW'(lrs1[g]);
        n2 = n2 + CW'(lrs2[g]);
      end
    end

    site2_compsub #(.CNT_W(CW)) u_cs (.en(sub_en), .n1(n1), .n2(n2), .s_pos(s_pos), .mag(mag));
    site_adc #(.CNT_W(CW)) u_adc (.cnt(mag), .code(code));

    assign psum[j] = s_pos ? $signed({1'b0, code}) : -$signed({1'b0, code});
  end

endmodule
