// site_pcu -- peripheral compute unit: sample-and-hold, partial-sum accumulation and ternary
// activation for a group of COLS columns.
//
// The paper fixes 32 PCUs for the 256 columns of an array, so one PCU serves 8 columns. On
// sh_load it samples the column outputs psum_in into its hold registers (the sample-and-hold).
// With sh_acc also high it then adds the held values into its per-column accumulators, one column
// per clock through a single shared adder, so a block access is absorbed in COLS clocks. ready is
// high when sh_load may be given: while idle, or in the clock that adds the last column (the
// adder reads the old held value in that clock). sh_load without sh_acc only samples; the held
// values then serve as read data. acc_clr zeroes the accumulators and is only legal while no
// accumulation runs. act is the ternarized accumulator (site_act_quant), combinational.
//
// Follows the paper: PCU count per array, sample-and-hold of column partial sums, accumulation
// over block accesses, quantization + activation. This design's own choices: the serial shared
// adder, the 16-bit accumulator, the threshold quantizer and the control signals.
// Reset: asynchronous, active low; clears the sequencer and the accumulators.
module site_pcu
  import site_pkg::*;
#(
  parameter int unsigned COLS  = 8,   // columns served
  parameter int unsigned ACC_W = SITE_ACC_W   // accumulator width
) (
  input  logic                     clk,
  input  logic                     rst_ni,
  input  logic                     sh_load,           // sample the column outputs
  input  logic                     sh_acc,            // ... and accumulate them
  input  logic                     acc_clr,           // clear accumulators
  input  logic signed [PSUM_W-1:0] psum_in [COLS],    // column outputs of this access
  input  logic        [ACC_W-2:0]  thr,               // activation threshold
  output logic                     ready,             // sh_load accepted this clock
  output logic                     busy,              // accumulation running
  output logic signed [PSUM_W-1:0] hold    [COLS],    // held column outputs
  output logic signed [ACC_W-1:0]  acc     [COLS],    // accumulated dot products
  output logic        [1:0]        act     [COLS]     // ternary activations
);
  localparam int unsigned IW = (COLS > 1) ? $clog2(COLS) : 1;

  logic          run;
  logic [IW-1:0] idx;
  logic          last;

  assign last  = (idx == IW'(COLS - 1));
  assign ready = !run || last;
  assign busy  = run;

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      run <= 1'b0;
      idx <= '0;
      for (int c = 0; c < COLS; c++) begin
        acc[c]  <= '0;
        hold[c] <= '0;
      end
    end else begin
      if (acc_clr) begin
        for (int c = 0; c < COLS; c++) acc[c] <= '0;
      end
      if (run) begin
        acc[idx] <= acc[idx] + ACC_W'(hold[idx]);
        idx      <= idx + 1'b1;
        if (last) run <= 1'b0;
      end
      if (sh_load) begin
        hold <= psum_in;
        if (sh_acc) begin
          run <= 1'b1;
          idx <= '0;
        end
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_act
    site_act_quant #(.ACC_W(ACC_W)) u_q (.acc(acc[c]), .thr(thr), .act(act[c]));
  end

  a_load_ready: assert property (@(posedge clk) disable iff (!rst_ni) sh_load |-> ready)
    else $error("site_pcu: sample while the adder still needs the held values");
  a_clr_idle: assert property (@(posedge clk) disable iff (!rst_ni) acc_clr |-> !run)
    else $error("site_pcu: clear during accumulation");
endmodule
