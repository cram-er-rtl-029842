// cram_array_tb - random test of the CRAM array on an 8 x 16 instance.
// Loads every row through the host port, then applies a long random stream of
// CLR, NAND (with random device errors), MOVE (row distances 1, 2, 4 and 8)
// and EC micro-operations. After each operation every row is read back and the
// sense-amp fields are compared with a reference array kept in the testbench.
// The reference uses the NAND truth table written out case by case: input 00
// always gives 1; otherwise an error inverts the ideal output.
module cram_array_tb;
  import cram_pkg::*;
  localparam int ROWS = 8, COLS = 16, OUT_LO = 8, OUT_W = 4, C_LO = 12, NOPS = 600;

  logic              clk = 0;
  logic              op_valid = 0;
  cram_op_t          op;
  logic [ROWS-1:0]   sw_err = '0, ec_bit = '0;
  logic              host_we = 0, host_re = 0;
  logic [2:0]        host_addr = '0;
  logic [COLS-1:0]   host_wdata = '0, host_rdata;
  logic [OUT_W-1:0]  sa_sum   [ROWS];
  logic [2:0]        sa_carry [ROWS];

  logic [COLS-1:0]   model [ROWS];
  int checks = 0, failures = 0;
  int n_nand_err = 0, n_move = 0, n_ec = 0, n_clr = 0;

  cram_array #(.ROWS(ROWS), .COLS(COLS), .OUT_LO(OUT_LO), .OUT_W(OUT_W), .C_LO(C_LO)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      host_re = 1;
      host_addr = 3'(r);
      @(negedge clk);
      host_re = 0;
      checks++;
      if (host_rdata !== model[r] || sa_sum[r] !== model[r][OUT_LO +: OUT_W] ||
          sa_carry[r] !== model[r][C_LO +: 3]) begin
        failures++;
        $display("FAIL row %0d: got %h exp %h (op %p)", r, host_rdata, model[r], op);
      end
    end
  endtask

  function automatic logic ref_nand(logic a, logic b, logic err);
    if (!a && !b) return 1'b1;        // 00: preset 0 always switches to 1
    else if (a && b) return err;      // 11: stays 0 unless it switches in error
    else return !err;                 // 01/10: switches to 1 unless in error
  endfunction

  initial begin
    op = '0;
    // memory mode: load all rows
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      host_we = 1;
      host_addr = 3'(r);
      host_wdata = COLS'($urandom);
      model[r] = host_wdata;
    end
    @(negedge clk);
    host_we = 0;
    check_all();
    // logic mode
    for (int n = 0; n < NOPS; n++) begin
      logic [COLS-1:0] old [ROWS];
      int a, b, o, rowdist, k;
      @(negedge clk);
      a = $urandom_range(COLS-1); b = $urandom_range(COLS-1); o = $urandom_range(COLS-1);
      rowdist = $urandom_range(3);
      k = $urandom_range(3);
      op.op = (k == 0) ? OP_CLR : (k == 1) ? OP_NAND : (k == 2) ? OP_MOVE : OP_EC;
      if (n % 10 == 0) op.op = OP_NOP;
      op.a = 8'(a); op.b = 8'(b); op.o = 8'(o); op.rowdist = 5'(rowdist);
      sw_err = ROWS'($urandom);
      ec_bit = ROWS'($urandom);
      // a host write at the same time must lose to the micro-operation
      host_we = (n % 5 == 1);
      host_wdata = COLS'($urandom);
      host_addr = 3'($urandom);
      op_valid = 1;
      old = model;
      for (int r = 0; r < ROWS; r++) begin
        case (op.op)
          OP_CLR:  begin model[r][o] = 1'b0; if (r == 0) n_clr++; end
          OP_NAND: begin
            model[r][o] = ref_nand(old[r][a], old[r][b], sw_err[r]);
            if (sw_err[r] && (old[r][a] || old[r][b])) n_nand_err++;
          end
          OP_MOVE: begin
            if (r + (1 << rowdist) < ROWS) model[r][o] = old[r + (1 << rowdist)][a];
            if (r == 0) n_move++;
          end
          OP_EC:   begin model[r][o] = ec_bit[r]; if (r == 0) n_ec++; end
          default: ;
        endcase
      end
      @(negedge clk);
      op_valid = 0;
      host_we = 0;
      check_all();
    end
    checks++;
    if (n_nand_err == 0 || n_move == 0 || n_ec == 0 || n_clr == 0) begin
      failures++;
      $display("FAIL some operation never exercised");
    end
    $display("nand errors %0d, moves %0d, ec %0d, clr %0d", n_nand_err, n_move, n_ec, n_clr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
