// cram_controller_tb - runs the controller's micro-program on a simple array
// model kept in the testbench (16 rows, 64 columns) and checks that:
//   * each group of 2^LEVELS rows ends with the sum of its W*X products in the
//     final partial-sum field of its first row (computed arithmetically here);
//   * a wrong second carry copy injected in one row is voted away by the EC
//     step (the model votes with its own majority);
//   * the program is PROG_LEN cycles long, holds more than 200 NANDs for a
//     4-bit MAC, one EC per in-CRAM level, and the tree handshake, busy and
//     done behave as documented, with start ignored while busy.
module cram_controller_tb;
  import cram_pkg::*;
  localparam int Q = 4, L = 2, ROWS = 16, COLS = 64;
  localparam int PLEN = prog_len(Q, L);
  localparam int SW = 2*Q + L;

  logic     clk = 0, rst_n = 0, start = 0, busy, done, op_valid, tree_start, tree_done = 0;
  cram_op_t op;
  logic [COLS-1:0] m [ROWS];
  int checks = 0, failures = 0;
  int n_ops, n_nand, n_move, n_ec, n_fixed, cyc, t_start, t_tree;
  bit inject;

  cram_controller #(.Q(Q), .LEVELS(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
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

  // the array model: executes each issued micro-operation
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (op_valid) begin
      logic [COLS-1:0] old [ROWS];
      old = m;
      n_ops++;
      for (int r = 0; r < ROWS; r++) begin
        case (op.op)
          OP_CLR:  m[r][op.o] = 1'b0;
          OP_NAND: begin
            m[r][op.o] = !(old[r][op.a] && old[r][op.b]);
            if (inject && r == 4 && int'(op.o) == col_c(Q, L, 1)) m[r][op.o] = !m[r][op.o];
          end
          OP_MOVE: if (r + (1 << op.rowdist) < ROWS) m[r][op.o] = old[r + (1 << op.rowdist)][op.a];
          OP_EC: begin
            int v;
            v = old[r][col_c(Q, L, 0)] + old[r][col_c(Q, L, 1)] + old[r][col_c(Q, L, 2)];
            m[r][op.o] = (v >= 2);
            if (old[r][col_c(Q, L, 0)] != old[r][col_c(Q, L, 1)] ||
                old[r][col_c(Q, L, 1)] != old[r][col_c(Q, L, 2)]) n_fixed++;
          end
          default: ;
        endcase
      end
      if (op.op == OP_NAND) n_nand++;
      if (op.op == OP_MOVE) n_move++;
      if (op.op == OP_EC)   n_ec++;
    end
    if (tree_start) t_tree = cyc;
  end

  task automatic run_pass(bit inj);
    int exp_sum [ROWS];
    inject = inj;
    n_ops = 0; n_nand = 0; n_move = 0; n_ec = 0; n_fixed = 0;
    for (int r = 0; r < ROWS; r++) begin
      int w, x;
      w = (r == 0) ? (1 << Q) - 1 : $urandom_range((1 << Q) - 1);
      x = (r == 0) ? (1 << Q) - 1 : $urandom_range((1 << Q) - 1);
      m[r] = {$urandom, $urandom};
      m[r][Q-1:0] = Q'(w);
      m[r][2*Q-1:Q] = Q'(x);
      exp_sum[r] = w * x;
    end
    @(negedge clk);
    start = 1;
    t_start = cyc;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    // a second start while busy must be ignored
    repeat (10) @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (tree_start);
    @(posedge clk);
    #1;
    check(!tree_start, "tree_start lasts one cycle");
    repeat (3) @(negedge clk);
    check(busy && !done, "waiting for the tree");
    tree_done = 1;
    #1;
    check(done, "done follows tree_done");
    @(negedge clk);
    tree_done = 0;
    check(!busy, "idle after done");
    check(n_ops == PLEN, $sformatf("program length %0d exp %0d", n_ops, PLEN));
    check(t_tree - t_start == PLEN + 1, $sformatf("tree start at %0d", t_tree - t_start));
    check(n_nand == prog_nands(Q, L) && n_nand > 200, $sformatf("nands %0d", n_nand));
    check(n_ec == L && n_move == (2*Q) + (2*Q + 1), $sformatf("ec %0d moves %0d", n_ec, n_move));
    if (inj) check(n_fixed >= 1, "injected carry error seen by EC");
    for (int g = 0; g < ROWS; g += (1 << L)) begin
      int e, got;
      e = 0;
      for (int r = g; r < g + (1 << L); r++) e += exp_sum[r];
      got = int'(m[g][out_lo(Q, L) +: SW]);
      check(got == e, $sformatf("group %0d sum %0d exp %0d", g, got, e));
    end
  endtask

  initial begin
    cyc = 0; inject = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !op_valid, "idle after reset");
    for (int p = 0; p < 6; p++) run_pass(p % 2 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
