// cram_er_top_tb - end-to-end test of the CRAM-ER macro at its default size
// (1024 x 64 array, 4-bit operands, two in-CRAM tree levels, 256-input CMOS
// adder tree). Each pass loads a random weight/input pair into every row
// through the host port, starts a dot product and compares the result with the
// sum of products computed here. Passes:
//   0 - ideal array; also checks the start-to-done latency;
//   1 - one device error on the second copy of a final carry (row 0, first
//       in-CRAM level): the EC vote must hide it;
//   2 - one device error on bit 0 of a final in-CRAM sum (row 8): EC does not
//       cover sum bits, so the result must be off by exactly one;
//   3 - host writes attempted while busy must be ignored.
// Every mechanism (multiply, row move, in-CRAM add, EC vote that corrects,
// CMOS tree, blocked host write, uncorrected error) is counted and must occur.
module cram_er_top_tb;
  import cram_pkg::*;
  localparam int ROWS = 1024, COLS = 64, Q = 4, L = 2;
  localparam int N_TREE = ROWS >> L;
  localparam int RES_W = 2*Q + L + $clog2(N_TREE);
  localparam int LAT = prog_len(Q, L) + $clog2(N_TREE) + 1;

  logic             clk = 0, rst_n = 0;
  logic             host_we = 0, host_re = 0, start = 0, busy, done;
  logic [9:0]       host_addr = '0;
  logic [COLS-1:0]  host_wdata = '0, host_rdata;
  logic [RES_W-1:0] result;
  logic [ROWS-1:0]  sw_err;

  int checks = 0, failures = 0;
  int n_nand = 0, n_move = 0, n_ec = 0, n_ec_fix = 0, n_tree = 0, n_blocked = 0, n_uncorr = 0;
  int mode = 0;
  int cyc = 0;
  logic [2*Q-1:0] wx [ROWS];

  cram_er_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // device error source for the directed passes, and mechanism counters
  always_comb begin
    sw_err = '0;
    if (dut.u_ctrl.op_valid && dut.u_ctrl.op.op == OP_NAND) begin
      if (mode == 1 && int'(dut.u_ctrl.op.o) == col_c(Q, L, 1) &&
          dut.u_ctrl.pc < 300) sw_err[0] = 1'b1;
      if (mode == 2 && int'(dut.u_ctrl.op.o) == out_lo(Q, L)) sw_err[8] = 1'b1;
    end
  end

  always @(posedge clk) begin
    if (dut.u_ctrl.op_valid) begin
      case (dut.u_ctrl.op.op)
        OP_NAND: n_nand++;
        OP_MOVE: n_move++;
        OP_EC: begin
          n_ec++;
          for (int r = 0; r < ROWS; r++)
            if (dut.sa_carry[r] != 3'b000 && dut.sa_carry[r] != 3'b111) n_ec_fix++;
        end
        default: ;
      endcase
    end
    if (dut.tree_valid) n_tree++;
  end

  task automatic load_rows();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      host_we = 1;
      host_addr = 10'(r);
      wx[r] = (r == 0) ? '1 : 8'($urandom);
      host_wdata = {$urandom, $urandom};
      host_wdata[2*Q-1:0] = wx[r];
    end
    @(negedge clk);
    host_we = 0;
  endtask

  function automatic int golden();
    int s = 0;
    for (int r = 0; r < ROWS; r++) s += int'(wx[r][Q-1:0]) * int'(wx[r][2*Q-1:Q]);
    return s;
  endfunction

  task automatic run_pass(int m);
    int t0, g;
    mode = m;
    load_rows();
    g = golden();
    @(negedge clk);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    if (m == 3) begin
      // try to overwrite row 5 while the macro computes
      repeat (20) @(negedge clk);
      host_we = 1;
      host_addr = 10'd5;
      host_wdata = '0;
      @(negedge clk);
      host_we = 0;
    end
    wait (done);
    if (m == 0) check(cyc - t0 - 1 == LAT, $sformatf("latency %0d exp %0d", cyc - t0 - 1, LAT));
    @(negedge clk);
    check(!busy, "idle after done");
    case (m)
      2: begin
        check(int'(result) == g - 1 || int'(result) == g + 1,
              $sformatf("pass 2 result %0d exp %0d +- 1", result, g));
        if (int'(result) != g) n_uncorr++;
      end
      default: check(int'(result) == g, $sformatf("pass %0d result %0d exp %0d", m, result, g));
    endcase
    if (m == 3) begin
      @(negedge clk);
      host_re = 1;
      host_addr = 10'd5;
      @(negedge clk);
      host_re = 0;
      check(host_rdata[2*Q-1:0] == wx[5], "row 5 operands survive a write while busy");
      if (host_rdata[2*Q-1:0] == wx[5]) n_blocked++;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) run_pass(m);
    check(n_nand > 0 && n_move > 0 && n_ec > 0, "multiply, move and EC all issued");
    check(n_ec_fix > 0, "EC corrected a carry");
    check(n_tree == 4, "adder tree ran once per pass");
    check(n_blocked > 0 && n_uncorr > 0, "blocked host write and uncorrected error seen");
    $display("nand %0d move %0d ec %0d ec_fix %0d tree %0d blocked %0d uncorr %0d",
             n_nand, n_move, n_ec, n_ec_fix, n_tree, n_blocked, n_uncorr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
