// tb_site_ctrl -- controller with 256 rows, 16 rows per access and 4 arrays, against a
// behavioural PCU (absorbs an accumulating access in 8 clocks, ready again in the 8th).
// Checks the latencies (WRITE 2 clocks, READ 2, MAC 16*8+2 = 130 from command acceptance to
// done), that WRITE strobes only the addressed array with the right row, that READ accesses only
// the addressed array with the row's group and in-group index, that a MAC makes exactly 16
// accumulating accesses with steps 0..15 on all arrays, and that clear is issued only when asked.
module tb_site_ctrl;
  import site_pkg::*;
  localparam int NR = 256, NA = 16, N_ARR = 4, COLS = 8;
  logic clk = 1'b0, rst_ni;
  logic cmd_valid, cmd_ready;
  site_cmd_t cmd;
  logic [N_ARR-1:0] wr_en, acc_en;
  logic [7:0] wr_row;
  logic [3:0] step, rd_grp;
  logic rd_mode, sh_acc, acc_clr, pcu_ready, pcu_busy, done;
  int checks = 0, failures = 0;

  site_ctrl #(.NR(NR), .NA(NA), .N_ARR(N_ARR)) dut (.*);

  always #5 clk = ~clk;

  // behavioural PCU
  int pcnt;
  assign pcu_busy  = (pcnt > 0);
  assign pcu_ready = (pcnt <= 1);
  always_ff @(posedge clk or negedge rst_ni)
    if (!rst_ni) pcnt <= 0;
    else if (|acc_en && sh_acc) pcnt <= COLS;
    else if (pcnt > 0) pcnt <= pcnt - 1;

  // access log
  int n_acc, n_clr;
  int steps_seen [$];
  always @(posedge clk) begin
    if (rst_ni && |acc_en && sh_acc) begin
      n_acc++;
      steps_seen.push_back(int'(step));
    end
    if (rst_ni && acc_clr) n_clr++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // issue a command, return clocks from acceptance to done
  task automatic issue(op_e op, int arr, int row, bit clr, output int lat,
                       input bit watch_rd = 0);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, arr: 8'(arr), row: 16'(row), clr: clr};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 1;
    while (!done) begin
      if (op == OP_WRITE && wr_en != '0) begin
        chk(wr_en == (N_ARR)'(1 << arr), "write strobe one-hot");
        chk(int'(wr_row) == row, "write row");
        chk(lat == 1, "write strobe one clock after acceptance");
      end
      if (op == OP_READ && acc_en != '0) begin
        chk(acc_en == (N_ARR)'(1 << arr), "read strobes addressed array");
        chk(rd_mode && !sh_acc, "read is a sample-only access");
        chk(int'(rd_grp) == row / (NR / NA) && int'(step) == row % (NR / NA), "read row split");
      end
      @(negedge clk);
      lat++;
    end
    chk(wr_en == '0, "no write strobe with done");
  endtask

  initial begin
    int lat;
    rst_ni = 1'b0; cmd_valid = 1'b0; cmd = '0; n_acc = 0; n_clr = 0;
    repeat (3) @(negedge clk);
    rst_ni = 1'b1;
    for (int k = 0; k < 20; k++) begin
      int a, r;
      a = $urandom_range(N_ARR - 1); r = $urandom_range(NR - 1);
      issue(OP_WRITE, a, r, 0, lat);
      chk(lat == 2, "WRITE latency 2");
      issue(OP_READ, a, r, 0, lat, 1);
      chk(lat == 2, "READ latency 2");
    end
    chk(n_acc == 0, "no accumulating access outside MAC");
    for (int k = 0; k < 4; k++) begin
      n_acc = 0; n_clr = 0; steps_seen.delete();
      issue(OP_MAC, 0, 0, k[0], lat);
      chk(lat == 16 * COLS + 2, "MAC latency 130");
      chk(n_acc == 16, "16 accesses per MAC");
      chk(n_clr == (k[0] ? 1 : 0), "clear only when requested");
      for (int s = 0; s < steps_seen.size(); s++) chk(steps_seen[s] == s, "step order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_ni && |acc_en && sh_acc) begin
    checks++;
    if (acc_en != '1) begin failures++; $display("FAIL MAC access not on all arrays"); end
  end
endmodule
