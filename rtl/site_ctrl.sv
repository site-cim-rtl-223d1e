// site_ctrl -- command sequencer of the compute-in-memory core.
//
// Takes one command at a time (cmd_valid/cmd_ready handshake, site_cmd_t) and drives all arrays
// and their PCUs in lock step. done pulses for one clock when a command has completed.
//   WRITE: one clock later wr_en of array cmd.arr is high for one clock and the row is programmed
//          at the end of that clock; done follows one clock later (2 clocks after acceptance).
//   READ:  one clock later array cmd.arr makes a single-row access of row cmd.row with input +1
//          (row RWL / RWL1 only, as for a memory read) and its PCUs sample the result; done
//          follows one clock later, when the row's ternary weights sit in the PCU hold registers.
//   MAC:   NR/NA accesses. Access s applies input element g*NRB + s to row s of every group g,
//          so 16 accesses cover all 256 rows, one row per group or block per access. Every access
//          waits for pcu_ready, so with 8-column PCUs they come 8 clocks apart; done comes when the
//          PCUs have added the last access: NRB*COLS + 2 clocks after the command is taken.
//          cmd.clr first clears the accumulators, otherwise results add to the previous ones.
// The command encoding and handshake are this design's own; the 16-access MAC follows the paper.
// Reset: asynchronous, active low.
module site_ctrl
  import site_pkg::*;
#(
  parameter int unsigned NR    = SITE_NR,  // rows per array
  parameter int unsigned NA    = SITE_NA,   // rows activated per access
  parameter int unsigned N_ARR = SITE_N_ARR    // arrays
) (
  input  logic                      clk,
  input  logic                      rst_ni,
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  site_cmd_t                 cmd,
  output logic [N_ARR-1:0]          wr_en,     // per-array row write
  output logic [$clog2(NR)-1:0]     wr_row,
  output logic [N_ARR-1:0]          acc_en,    // per-array compute access
  output logic [$clog2(NR/NA)-1:0]  step,      // row inside each group
  output logic                      rd_mode,   // access is a single-row read
  output logic [$clog2(NA)-1:0]     rd_grp,    // group of the row read
  output logic                      sh_acc,    // PCUs accumulate this access
  output logic                      acc_clr,   // clear PCU accumulators
  input  logic                      pcu_ready, // all PCUs can sample
  input  logic                      pcu_busy,  // some PCU still accumulating
  output logic                      done
);
  localparam int unsigned NRB = NR / NA;
  localparam int unsigned SW  = $clog2(NRB);
  localparam int unsigned AW  = (N_ARR > 1) ? $clog2(N_ARR) : 1;

  typedef enum logic [2:0] {S_IDLE, S_WR, S_WR_DONE, S_RD, S_RD_DONE, S_MAC, S_DRAIN} state_e;

  state_e          state;
  logic [AW-1:0]   arr_q;
  logic [$clog2(NR)-1:0] row_q;
  logic            clr_q;
  logic [SW-1:0]   s_q;

  assign cmd_ready = (state == S_IDLE);
  assign wr_row    = row_q;
  assign rd_grp    = row_q[$clog2(NR)-1 -: $clog2(NA)];

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) begin
      state <= S_IDLE;
      arr_q <= '0;
      row_q <= '0;
      clr_q <= 1'b0;
      s_q   <= '0;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid) begin
          arr_q <= cmd.arr[AW-1:0];
          row_q <= cmd.row[$clog2(NR)-1:0];
          clr_q <= cmd.clr;
          s_q   <= '0;
          case (cmd.op)
            OP_WRITE: state <= S_WR;
            OP_READ:  state <= S_RD;
            OP_MAC:   state <= S_MAC;
            default:  state <= S_IDLE;
          endcase
        end
        S_WR:      state <= S_WR_DONE;
        S_WR_DONE: state <= S_IDLE;
        S_RD:      if (pcu_ready) state <= S_RD_DONE;
        S_RD_DONE: state <= S_IDLE;
        S_MAC: if (pcu_ready) begin
          clr_q <= 1'b0;
          s_q   <= s_q + 1'b1;
          if (s_q == SW'(NRB - 1)) state <= S_DRAIN;
        end
        S_DRAIN:   if (!pcu_busy) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    wr_en   = '0;
    acc_en  = '0;
    step    = s_q;
    rd_mode = 1'b0;
    sh_acc  = 1'b0;
    acc_clr = 1'b0;
    done    = 1'b0;
    case (state)
      S_WR:      wr_en[arr_q] = 1'b1;
      S_WR_DONE: done = 1'b1;
      S_RD: begin
        rd_mode = 1'b1;
        step    = row_q[SW-1:0];
        if (pcu_ready) acc_en[arr_q] = 1'b1;
      end
      S_RD_DONE: done = 1'b1;
      S_MAC: begin
        acc_clr = clr_q;
        if (pcu_ready) begin
          acc_en = '1;
          sh_acc = 1'b1;
        end
      end
      S_DRAIN: done = !pcu_busy;
      default: ;
    endcase
  end

  a_arr_range: assert property (@(posedge clk) disable iff (!rst_ni)
      (cmd_valid && cmd_ready && cmd.op inside {OP_WRITE, OP_READ}) |-> (32'(cmd.arr) < N_ARR))
    else $error("site_ctrl: array index out of range");
  a_valid_hold: assert property (@(posedge clk) disable iff (!rst_ni)
      (state != S_IDLE) |-> !cmd_ready)
    else $error("site_ctrl: command taken while busy");
endmodule
