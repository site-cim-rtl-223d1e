// site_macro -- one signed-ternary compute-in-memory macro: an NR x NC array of the chosen
// flavour with its column ADCs, NC/N_PCU-column PCUs and the input staging.
//
// FLAVOR selects the array: SITE_I (site1_array, two cross-coupling transistors per cell) or
// SITE_II (site2_array, four shared transistors per 16-cell sub-column). Both present the same
// interface, so the rest of the macro is common. For a MAC access the staging applies input
// element g*NRB + step of in_vec to group/block g; for a read it applies +1 to group rd_grp only,
// which reads row rd_grp*NRB + step. When acc_en is low all wordlines stay low. Column outputs
// go to the PCUs, which sample them when acc_en is high and accumulate them when sh_acc is
// also high. Outputs: the PCUs' accumulators (acc), ternary activations (act) and held column
// outputs (hold, which after a read are the row's weights).
// Structure follows the paper (array + per-column ADCs + 32 PCUs); the staging is this design's.
module site_macro
  import site_pkg::*;
#(
  parameter flavor_e     FLAVOR = SITE_I,
  parameter int unsigned NR     = SITE_NR,
  parameter int unsigned NC     = SITE_NC,
  parameter int unsigned NA     = SITE_NA,
  parameter int unsigned N_PCU  = SITE_N_PCU,
  parameter int unsigned ACC_W  = SITE_ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_ni,
  input  logic                          wr_en,
  input  logic [$clog2(NR)-1:0]         wr_row,
  input  logic [1:0]                    wr_w    [NC],
  input  logic [1:0]                    in_vec  [NR],   // ternary input vector
  input  logic                          acc_en,         // compute access this clock
  input  logic [$clog2(NR/NA)-1:0]      step,
  input  logic                          rd_mode,
  input  logic [$clog2(NA)-1:0]         rd_grp,
  input  logic                          sh_acc,
  input  logic                          acc_clr,
  input  logic        [ACC_W-2:0]       thr,
  output logic                          pcu_ready,      // all PCUs ready
  output logic                          pcu_busy,       // some PCU accumulating
  output logic signed [PSUM_W-1:0]      hold    [NC],
  output logic signed [ACC_W-1:0]       acc     [NC],
  output logic        [1:0]             act     [NC]
);
  localparam int unsigned NRB  = NR / NA;
  localparam int unsigned COLS = NC / N_PCU;

  logic [$clog2(NRB)-1:0]    sel   [NA];
  logic [1:0]                in_t  [NA];
  logic signed [PSUM_W-1:0]  psum  [NC];

  always_comb begin
    for (int g = 0; g < NA; g++) begin
      sel[g] = step;
      if (!acc_en)      in_t[g] = TRIT_Z;
      else if (rd_mode) in_t[g] = (g == int'(rd_grp)) ? TRIT_P : TRIT_Z;
      else              in_t[g] = in_vec[g*NRB + int'(step)];
    end
  end

  if (FLAVOR == SITE_I) begin : g_arr
    site1_array #(.NR(NR), .NC(NC), .NA(NA)) u_array (
      .clk, .wr_en, .wr_row, .wr_w, .sel, .in_t, .psum
    );
  end else begin : g_arr
    site2_array #(.NR(NR), .NC(NC), .NA(NA)) u_array (
      .clk, .wr_en, .wr_row, .wr_w, .sel, .in_t, .psum
    );
  end

  logic [N_PCU-1:0] rdy, bsy;

  for (genvar p = 0; p < N_PCU; p++) begin : g_pcu
    logic signed [PSUM_W-1:0] p_in   [COLS];
    logic signed [PSUM_W-1:0] p_hold [COLS];
    logic signed [ACC_W-1:0]  p_acc  [COLS];
    logic        [1:0]        p_act  [COLS];

    for (genvar c = 0; c < COLS; c++) begin : g_c
      assign p_in[c]          = psum[p*COLS + c];
      assign hold[p*COLS + c] = p_hold[c];
      assign acc[p*COLS + c]  = p_acc[c];
      assign act[p*COLS + c]  = p_act[c];
    end

    site_pcu #(.COLS(COLS), .ACC_W(ACC_W)) u_pcu (
      .clk, .rst_ni, .sh_load(acc_en), .sh_acc, .acc_clr, .psum_in(p_in), .thr,
      .ready(rdy[p]), .busy(bsy[p]), .hold(p_hold), .acc(p_acc), .act(p_act)
    );
  end

  assign pcu_ready = &rdy;
  assign pcu_busy  = |bsy;
endmodule
