// adder_tree - CMOS partial adder tree of the CRAM-ER macro.
//
// Sums N_IN unsigned partial sums of IN_W bits into one (IN_W + log2 N_IN)-bit
// result. It is a binary tree of two-input adders, one register stage per tree
// level, so a new set of inputs can enter every cycle and the sum leaves
// log2(N_IN) cycles later with out_valid. Adders widen by one bit per level,
// so nothing overflows.
//
// Follows the source paper: a digital (error-free) adder tree finishes the
// accumulation that the CRAM rows leave, taking the output bits of the rows
// through the sense amps. This design's own choices: the pipeline register on
// every level, the valid signal and the synchronous active-low reset of the
// valid chain (the data registers need no reset). N_IN must be a power of two
// of at least 2.
module adder_tree #(
  parameter int unsigned N_IN  = 256,
  parameter int unsigned IN_W  = 10,
  localparam int unsigned LVLS  = $clog2(N_IN),
  localparam int unsigned OUT_W = IN_W + LVLS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_data [N_IN],
  output logic             out_valid,
  output logic [OUT_W-1:0] out_sum
);

  initial assert (N_IN >= 2 && (1 << LVLS) == N_IN)
    else $fatal(1, "N_IN must be a power of two >= 2");

  // Level k is a generate block holding the N_IN >> k registered sums of that
  // level, each IN_W + k bits wide; level 0 is the input set itself.
  for (genvar k = 0; k <= LVLS; k++) begin : g_lvl
    localparam int unsigned W = IN_W + k;
    logic [W-1:0] s [N_IN >> k];
    logic         v;
    if (k == 0) begin : g_in
      always_comb begin
        for (int unsigned i = 0; i < N_IN; i++) s[i] = in_data[i];
        v = in_valid;
      end
    end else begin : g_add
      for (genvar i = 0; i < (N_IN >> k); i++) begin : g_node
        always_ff @(posedge clk)
          s[i] <= W'(g_lvl[k-1].s[2*i]) + W'(g_lvl[k-1].s[2*i+1]);
      end
      always_ff @(posedge clk) begin
        if (!rst_n) v <= 1'b0;
        else        v <= g_lvl[k-1].v;
      end
    end
  end

  assign out_valid = g_lvl[LVLS].v;
  assign out_sum   = g_lvl[LVLS].s[0];

endmodule
