// cram_controller - sequencer of one CRAM-ER dot-product pass.
//
// On start it plays the micro-program of cram_pkg::gen_op() to the array, one
// micro-operation per cycle: the array multiplier (all rows in parallel), then
// LEVELS levels of in-CRAM pairwise addition, each made of row-to-row MOVEs, a
// ripple-carry adder of 9-NAND full adders, two extra copies of the final carry
// and one EC write-back. It then hands the rows' partial sums to the CMOS adder
// tree (tree_start, one cycle) and waits for the tree's result (tree_done),
// after which done pulses for one cycle and the controller is idle again.
//
// The program is a ROM of PROG_LEN words computed at elaboration time from the
// operand width Q and LEVELS, so changing either only needs new parameters.
//
// Timing from the cycle after start is seen: PROG_LEN cycles of op_valid, one
// cycle of tree_start, then the tree latency, then done. busy is high from the
// cycle after start until done. start is ignored while busy.
//
// Follows the source paper: the operation order (multiply, move, add, with
// only the final carry triplicated and corrected) and the split of the
// accumulation between CRAM and the CMOS tree. The sequencer itself, its ROM
// and its handshake are this design's own, as the paper does not describe how
// the operations are issued. Synchronous active-low reset.
module cram_controller
  import cram_pkg::*;
#(
  parameter int unsigned Q      = 4,   // operand bits (4b weights, 4b inputs)
  parameter int unsigned LEVELS = 2,   // tree levels done in CRAM (CRAM-ER(25%))
  localparam int unsigned PROG_LEN = prog_len(Q, LEVELS),
  localparam int unsigned PC_W     = $clog2(PROG_LEN + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  output logic     busy,
  output logic     done,
  // to the array
  output logic     op_valid,
  output cram_op_t op,
  // to / from the adder tree
  output logic     tree_start,
  input  logic     tree_done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_TREE, S_WAIT} state_e;

  state_e          state;
  logic [PC_W-1:0] pc;
  cram_op_t        rom [PROG_LEN];

  for (genvar k = 0; k < PROG_LEN; k++) begin : g_rom
    localparam cram_op_t OPK = gen_op(Q, LEVELS, k);
    assign rom[k] = OPK;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          pc    <= '0;
        end
        S_RUN: begin
          if (pc == PC_W'(PROG_LEN - 1)) state <= S_TREE;
          pc <= pc + 1'b1;
        end
        S_TREE: state <= S_WAIT;
        S_WAIT: if (tree_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    op_valid   = (state == S_RUN);
    op         = rom[(state == S_RUN) ? pc : '0];
    tree_start = (state == S_TREE);
    busy       = (state != S_IDLE);
    done       = (state == S_WAIT) && tree_done;
  end

endmodule
