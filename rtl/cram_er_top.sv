// cram_er_top - the CRAM-ER macro: a spintronic CRAM array with per-row
// selective error correction and a partial CMOS adder tree.
//
// Usage: the host loads one operand pair per row through the memory port: the
// Q-bit weight in columns [0,Q) and the Q-bit input in [Q,2Q); other columns
// are don't-care. A start pulse then computes the dot product
//   result = sum over all ROWS rows of W[r] * X[r]
// All rows multiply at once in CRAM. The products are then added pairwise
// between rows for LEVELS levels inside the array; after each level the final
// carry is voted by the row's EC (MAJ3). The ROWS >> LEVELS partial sums that
// remain are read through the sense amps and summed by the CMOS adder tree.
// result is valid with done and holds until the next done.
//
// With the defaults (1024 x 64 array, 4-bit operands, LEVELS = 2) three of
// every four additions of the dot product are done in CRAM and one in CMOS:
// the source's CRAM-ER(25%) configuration. LEVELS = 1 gives CRAM-ER(50%),
// LEVELS = 3 gives CRAM-ER(12.5%).
//
// sw_err[r] = 1 during a NAND micro-operation makes row r's output cell switch
// the wrong way (the device's probabilistic switching, which has no logic
// model here); tie it to 0 for an ideal array.
//
// Timing: host writes take one cycle each, host reads return one cycle after
// host_re. A dot product takes prog_len(Q, LEVELS) micro-operation cycles (321
// for the defaults), one cycle to start the tree, log2(ROWS >> LEVELS) tree
// cycles and one cycle to register the result. Host access is ignored while
// busy. Synchronous active-low reset of the control state.
module cram_er_top
  import cram_pkg::*;
#(
  parameter int unsigned ROWS   = 1024,
  parameter int unsigned COLS   = 64,
  parameter int unsigned Q      = 4,
  parameter int unsigned LEVELS = 2,
  localparam int unsigned RA_W   = $clog2(ROWS),
  localparam int unsigned SUM_W  = 2*Q + LEVELS,
  localparam int unsigned N_TREE = ROWS >> LEVELS,
  localparam int unsigned RES_W  = SUM_W + $clog2(N_TREE)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host memory port
  input  logic             host_we,
  input  logic             host_re,
  input  logic [RA_W-1:0]  host_addr,
  input  logic [COLS-1:0]  host_wdata,
  output logic [COLS-1:0]  host_rdata,
  // dot-product control
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic [RES_W-1:0] result,
  // device switching errors, one per row (from the MTJ cells)
  input  logic [ROWS-1:0]  sw_err
);

  initial assert (cols_needed(Q, LEVELS) <= COLS)
    else $fatal(1, "row too narrow for Q and LEVELS");

  localparam int unsigned OUT_LO = out_lo(Q, LEVELS);
  localparam int unsigned C_LO   = col_c(Q, LEVELS, 0);

  logic                 op_valid;
  logic                 ctrl_done;
  cram_op_t             op;
  logic [ROWS-1:0]      ec_bit;
  logic [SUM_W-1:0]     sa_sum   [ROWS];
  logic [2:0]           sa_carry [ROWS];
  logic [SUM_W-1:0]     tree_in  [N_TREE];
  logic                 tree_start, tree_valid;
  logic [RES_W-1:0]     tree_sum;

  cram_controller #(.Q(Q), .LEVELS(LEVELS)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done(ctrl_done),
    .op_valid, .op,
    .tree_start, .tree_done(tree_valid)
  );

  cram_array #(
    .ROWS(ROWS), .COLS(COLS), .OUT_LO(OUT_LO), .OUT_W(SUM_W), .C_LO(C_LO)
  ) u_array (
    .clk, .op_valid, .op, .sw_err, .ec_bit,
    .host_we(host_we && !busy), .host_re(host_re && !busy),
    .host_addr, .host_wdata, .host_rdata,
    .sa_sum, .sa_carry
  );

  // one EC voter per row
  for (genvar r = 0; r < ROWS; r++) begin : g_ec
    ec_maj3 u_ec (.c_copies(sa_carry[r]), .c_out(ec_bit[r]));
  end

  // the rows that hold a partial sum after LEVELS in-CRAM levels
  for (genvar i = 0; i < N_TREE; i++) begin : g_tap
    assign tree_in[i] = sa_sum[i << LEVELS];
  end

  adder_tree #(.N_IN(N_TREE), .IN_W(SUM_W)) u_tree (
    .clk, .rst_n, .in_valid(tree_start), .in_data(tree_in),
    .out_valid(tree_valid), .out_sum(tree_sum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      result <= '0;
      done   <= 1'b0;
    end else begin
      done <= ctrl_done;
      if (tree_valid) result <= tree_sum;
    end
  end

endmodule
