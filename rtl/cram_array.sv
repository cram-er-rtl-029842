// cram_array - digital model of the CRAM-ER cell array (ROWS x COLS 2T1M cells).
//
// Each row is one COLS-bit word of MTJ cells sharing a logic line. The array is
// both a memory and a logic fabric:
//   * memory mode: the host writes a whole row (host_we) or reads one back
//     (host_re, data on host_rdata one cycle later);
//   * logic mode: one micro-operation per cycle (op_valid, op) is applied to
//     the same columns of every row at once (see cram_pkg for the codes).
//
// A logic NAND follows the 2-input truth table of the source paper (Fig. 2(c)):
// the output cell is preset to 0 and the logic pulse switches it to 1 unless
// both inputs are 1. Switching is probabilistic in the device; sw_err[r] = 1
// marks that row r's output cell misbehaves on this pulse. Following the paper,
// input 00 is treated as error-free ("can be ensured to have negligible
// errors"), while for 01, 10 and 11 an error gives the opposite output.
// The error source itself (a random process with rate delta) is outside this
// block. MOVE, CLR and EC writes are ordinary memory writes and are error-free
// here; this is a choice of this model.
//
// The "output bits" of every row, the final partial-sum field and the three
// carry copies, are exposed continuously on sa_sum / sa_carry: they stand for
// the in-array sense amplifiers, whose analog part is not modelled. EC
// write-back data for OP_EC comes in on ec_bit (one bit per row).
//
// The cell contents have no reset, as in a real memory: the controller's
// micro-program writes every cell it reads except the weights and inputs,
// which the host loads.
//
// Timing: every micro-operation and host write takes effect at the clock edge
// where it is presented; host reads return on the next cycle. One cycle stands
// for one MRAM write pulse (3 ns in the source's device table).
module cram_array
  import cram_pkg::*;
#(
  parameter int unsigned ROWS   = 1024,
  parameter int unsigned COLS   = 64,
  parameter int unsigned OUT_LO = 46,   // first column of the final partial sum
  parameter int unsigned OUT_W  = 10,   // width of the final partial sum
  parameter int unsigned C_LO   = 56,   // first of the three carry-copy columns
  localparam int unsigned RA_W  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CA_W  = $clog2(COLS)
) (
  input  logic                  clk,
  // logic mode
  input  logic                  op_valid,
  input  cram_op_t              op,
  input  logic [ROWS-1:0]       sw_err,
  input  logic [ROWS-1:0]       ec_bit,
  // memory mode
  input  logic                  host_we,
  input  logic                  host_re,
  input  logic [RA_W-1:0]       host_addr,
  input  logic [COLS-1:0]       host_wdata,
  output logic [COLS-1:0]       host_rdata,
  // sense-amp read port: output bits of every row
  output logic [OUT_W-1:0]      sa_sum   [ROWS],
  output logic [2:0]            sa_carry [ROWS]
);

  initial begin
    assert (OUT_LO + OUT_W <= COLS) else $fatal(1, "sum field outside the row");
    assert (C_LO + 3 <= COLS) else $fatal(1, "carry copies outside the row");
  end

  logic [CA_W-1:0] ca, cb, co;     // column addresses trimmed to the row width
  logic [COLS-1:0] col_sel;        // one-hot destination column (shared driver)
  logic [COLS-1:0] row_q  [ROWS];  // cell contents, row by row
  logic [ROWS-1:0] bit_a, bit_b;   // each row's two selected source cells

  assign ca = op.a[CA_W-1:0];
  assign cb = op.b[CA_W-1:0];
  assign co = op.o[CA_W-1:0];

  always_comb begin
    col_sel = '0;
    col_sel[co] = 1'b1;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic [COLS-1:0] q;
    logic            move_bit, move_ok, wbit, we;

    assign bit_a[r] = q[ca];
    assign bit_b[r] = q[cb];
    assign row_q[r] = q;

    // MOVE source: the same column of the row 2^rowdist below this one
    always_comb begin
      move_bit = 1'b0;
      move_ok  = 1'b0;
      for (int unsigned s = 0; s < RA_W; s++) begin
        if (op.rowdist == SH_W'(s) && r + (1 << s) < ROWS) begin
          move_bit = bit_a[(r + (1 << s)) % ROWS];
          move_ok  = 1'b1;
        end
      end
    end

    always_comb begin
      unique case (op.op)
        OP_CLR:  begin wbit = 1'b0;      we = 1'b1;    end
        OP_NAND: begin
          wbit = ~(bit_a[r] & bit_b[r]) ^ (sw_err[r] & (bit_a[r] | bit_b[r]));
          we   = 1'b1;
        end
        OP_MOVE: begin wbit = move_bit;  we = move_ok; end
        OP_EC:   begin wbit = ec_bit[r]; we = 1'b1;    end
        default: begin wbit = 1'b0;      we = 1'b0;    end
      endcase
    end

    always_ff @(posedge clk) begin
      if (op_valid) begin
        if (we) begin
          for (int unsigned c = 0; c < COLS; c++)
            if (col_sel[c]) q[c] <= wbit;
        end
      end else if (host_we && host_addr == RA_W'(r)) begin
        q <= host_wdata;
      end
    end

    assign sa_sum[r]   = q[OUT_LO +: OUT_W];
    assign sa_carry[r] = q[C_LO +: 3];
  end

  always_ff @(posedge clk) begin
    if (host_re) host_rdata <= row_q[host_addr];
  end

endmodule
