// site_cim_top -- signed-ternary compute-in-memory core: N_ARR macros under one controller.
//
// Holds N_ARR x NR x NC ternary weights (32 x 256 x 256 = 2 M trits by default) and computes, per
// MAC command, N_ARR x NC dot products (8192) of length NR between each array's columns and that
// array's ternary input vector, 16 rows per array access. Commands (site_cmd_t) are taken with
// cmd_valid/cmd_ready; done pulses when one completes (see site_ctrl for the latencies).
//   WRITE: row cmd.row of array cmd.arr takes wr_w (wr_w must be stable in the clock after the
//          command is taken).
//   READ:  row cmd.row of array cmd.arr appears on rd_data when done is high, provided acc_sel
//          equals cmd.arr.
//   MAC:   acc_row shows the dot products of array acc_sel, act_out the ternary activations
//          (threshold thr) of all arrays; cmd.clr starts from zero, otherwise results add up,
//          which chains dot products longer than NR over several commands.
// FLAVOR picks the array circuit (SITE_I or SITE_II). Buffers, the host interface and the rest of
// the accelerator around the arrays are outside this core; their data paths are the ports.
// Reset: asynchronous, active low.
module site_cim_top
  import site_pkg::*;
#(
  parameter flavor_e     FLAVOR = SITE_I,
  parameter int unsigned N_ARR  = SITE_N_ARR,
  parameter int unsigned NR     = SITE_NR,
  parameter int unsigned NC     = SITE_NC,
  parameter int unsigned NA     = SITE_NA,
  parameter int unsigned N_PCU  = SITE_N_PCU,
  parameter int unsigned ACC_W  = SITE_ACC_W
) (
  input  logic                         clk,
  input  logic                         rst_ni,
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  site_cmd_t                    cmd,
  input  logic [1:0]                   wr_w     [NC],
  input  logic [1:0]                   in_vec   [N_ARR][NR],
  input  logic        [ACC_W-2:0]      thr,
  input  logic [$clog2(N_ARR)-1:0]     acc_sel,
  output logic signed [ACC_W-1:0]      acc_row  [NC],
  output logic [1:0]                   rd_data  [NC],
  output logic [1:0]                   act_out  [N_ARR][NC],
  output logic                         done
);
  logic [N_ARR-1:0]          wr_en, acc_en, rdy, bsy;
  logic [$clog2(NR)-1:0]     wr_row;
  logic [$clog2(NR/NA)-1:0]  step;
  logic [$clog2(NA)-1:0]     rd_grp;
  logic                      rd_mode, sh_acc, acc_clr;

  logic signed [PSUM_W-1:0]  hold [N_ARR][NC];
  logic signed [ACC_W-1:0]   acc  [N_ARR][NC];

  site_ctrl #(.NR(NR), .NA(NA), .N_ARR(N_ARR)) u_ctrl (
    .clk, .rst_ni, .cmd_valid, .cmd_ready, .cmd, .wr_en, .wr_row, .acc_en, .step, .rd_mode,
    .rd_grp, .sh_acc, .acc_clr, .pcu_ready(&rdy), .pcu_busy(|bsy), .done
  );

  for (genvar a = 0; a < N_ARR; a++) begin : g_mac
    site_macro #(
      .FLAVOR(FLAVOR), .NR(NR), .NC(NC), .NA(NA), .N_PCU(N_PCU), .ACC_W(ACC_W)
    ) u_macro (
      .clk, .rst_ni, .wr_en(wr_en[a]), .wr_row, .wr_w, .in_vec(in_vec[a]), .acc_en(acc_en[a]),
      .step, .rd_mode, .rd_grp, .sh_acc, .acc_clr, .thr, .pcu_ready(rdy[a]), .pcu_busy(bsy[a]),
      .hold(hold[a]), .acc(acc[a]), .act(act_out[a])
    );
  end

  always_comb begin
    for (int j = 0; j < NC; j++) begin
      acc_row[j] = acc[acc_sel][j];
      rd_data[j] = val_trit(int'(hold[acc_sel][j]));
    end
  end
endmodule
