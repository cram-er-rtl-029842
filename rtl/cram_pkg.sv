// cram_pkg - shared types, column layout and micro-program of the CRAM-ER macro.
//
// A CRAM row is a word of memory cells in which logic is done in place: every
// micro-operation is applied to the same columns of all rows at once, so the
// 1024 rows of the array compute 1024 products side by side. This package
// defines the micro-operation word (cram_op_t), where each operand lives in a
// row (the column layout), and gen_op(), a constant function that returns the
// n-th micro-operation of one dot product. The controller turns gen_op() into
// a ROM at elaboration time.
//
// What follows the paper: only 2-input NAND is used for logic; a full adder is
// the 9-NAND all-NAND adder; a QxQ product is formed by an array multiplier of
// ripple-carry adders; products are then summed pairwise between rows for
// LEVELS tree levels in CRAM, and for each of those additions only the final
// carry bit is computed three times and voted by the EC circuit (MAJ3). The
// rest of the accumulation is left to the CMOS adder tree.
//
// This design's own choices (the paper does not give them): the exact column
// layout below, the NAND order inside the full adder, computing AND as two
// NANDs (the second with both inputs on the same cell), producing the three
// carry copies by repeating the adder's last NAND three times, and moving data
// between rows with a dedicated row-parallel MOVE micro-operation.
package cram_pkg;

  // Micro-operation codes.
  //   OP_CLR  : write 0 into column o of every row (plain memory write)
  //   OP_NAND : o <= NAND(a, b) in every row (output preset to 0, then the
  //             logic pulse conditionally switches it, Fig. 2(c) of the source)
  //   OP_MOVE : row r column o <= row r+(1<<rowdist) column a, for every row r
  //   OP_EC   : o <= MAJ3 of the three carry-copy columns, in every row
  typedef enum logic [2:0] {
    OP_NOP  = 3'd0,
    OP_CLR  = 3'd1,
    OP_NAND = 3'd2,
    OP_MOVE = 3'd3,
    OP_EC   = 3'd4
  } op_e;

  localparam int unsigned COL_AW = 8;   // column address width (up to 256 columns)
  localparam int unsigned SH_W   = 5;   // MOVE row distance exponent width

  typedef struct packed {
    op_e               op;
    logic [COL_AW-1:0] a;   // first source column
    logic [COL_AW-1:0] b;   // second source column
    logic [COL_AW-1:0] o;   // destination column
    logic [SH_W-1:0]   rowdist;  // OP_MOVE: source row = row + (1 << rowdist)
  } cram_op_t;

  // ---------------------------------------------------------------------
  // Column layout of one row for Q-bit operands and L in-CRAM tree levels.
  //   [0, Q)              weight bits W
  //   [Q, 2Q)             input bits X
  //   2Q                  constant-zero column Z (carry-in of first FA)
  //   2Q+1 .. 2Q+7        temporaries T0..T6
  //   2Q+8  .. 3Q+7       partial-product row PP (Q bits)
  //   3Q+8  .. 5Q+7       product P (2Q bits)
  //   5Q+8  .. 7Q+7       level-1 moved operand B1 (2Q bits)
  //   7Q+8  ..            two sum buffers SR0, SR1 of 2Q+L bits each
  //   then                three carry copies C0..C2
  // Levels 2.. reuse the dead PP/P/B1 span (5Q columns) for their moved operand.
  // The sum buffers and carry copies are the "output bits" read by sense amps.
  // ---------------------------------------------------------------------
  function automatic int col_w (int i); return i; endfunction
  function automatic int col_x (int q, int i); return q + i; endfunction
  function automatic int col_z (int q); return 2*q; endfunction
  function automatic int col_t (int q, int k); return 2*q + 1 + k; endfunction
  function automatic int col_pp(int q, int i); return 2*q + 8 + i; endfunction
  function automatic int col_p (int q, int i); return 3*q + 8 + i; endfunction
  function automatic int col_b (int q, int lvl, int i);
    return (lvl == 1) ? (5*q + 8 + i) : (2*q + 8 + i);
  endfunction
  function automatic int sum_w (int q, int l); return 2*q + l; endfunction
  function automatic int col_sr(int q, int l, int buf_i, int i);
    return 7*q + 8 + buf_i*sum_w(q, l) + i;
  endfunction
  function automatic int col_c (int q, int l, int k);
    return 7*q + 8 + 2*sum_w(q, l) + k;
  endfunction
  function automatic int cols_needed(int q, int l); return col_c(q, l, 3); endfunction

  // Column of bit i of the result of tree level lvl (level 0 is the product).
  function automatic int col_lvl(int q, int l, int lvl, int i);
    return (lvl == 0) ? col_p(q, i) : col_sr(q, l, (lvl - 1) % 2, i);
  endfunction

  // First column of the final partial sum that the sense amps hand to the tree.
  function automatic int out_lo(int q, int l); return col_lvl(q, l, l, 0); endfunction

  // ---------------------------------------------------------------------
  // Micro-program length: one CLR of Z; the array multiplier (Q ANDs and Q
  // CLRs for the first row, then Q-1 rows of Q ANDs plus Q full adders); then
  // per tree level of width w = 2Q+lvl-1: w MOVEs, w full adders, two extra
  // final-carry NANDs and one EC.
  // ---------------------------------------------------------------------
  function automatic int prog_len(int q, int l);
    int n;
    n = 1 + 3*q + (q - 1) * (2*q + 9*q);
    for (int lvl = 1; lvl <= l; lvl++) n += 10 * (2*q + lvl - 1) + 3;
    return n;
  endfunction

  // NAND operations in the program (the quantity the source counts).
  function automatic int prog_nands(int q, int l);
    int n;
    n = 2*q + (q - 1) * (2*q + 9*q);
    for (int lvl = 1; lvl <= l; lvl++) n += 9 * (2*q + lvl - 1) + 2;
    return n;
  endfunction

  function automatic cram_op_t mk(op_e op, int a, int b, int o, int rowdist);
    cram_op_t r;
    r.op = op;
    r.a  = COL_AW'(a);
    r.b  = COL_AW'(b);
    r.o  = COL_AW'(o);
    r.rowdist = SH_W'(rowdist);
    return r;
  endfunction

  // Step k (0..8) of the 9-NAND full adder: s = a^b^c, co = maj(a,b,c).
  //   T0=n(a,b) T1=n(a,T0) T2=n(b,T0) T3=n(T1,T2)=a^b
  //   T4=n(T3,c) T1=n(T3,T4) T2=n(c,T4) s=n(T1,T2) co=n(T4,T0)
  // s may be the column of a (a is last read in step 1); co may be the column
  // of c (c is last read in step 6).
  function automatic cram_op_t fa_step(int q, int k, int a, int b, int c, int s, int co);
    case (k)
      0:       return mk(OP_NAND, a,           b,           col_t(q, 0), 0);
      1:       return mk(OP_NAND, a,           col_t(q, 0), col_t(q, 1), 0);
      2:       return mk(OP_NAND, b,           col_t(q, 0), col_t(q, 2), 0);
      3:       return mk(OP_NAND, col_t(q, 1), col_t(q, 2), col_t(q, 3), 0);
      4:       return mk(OP_NAND, col_t(q, 3), c,           col_t(q, 4), 0);
      5:       return mk(OP_NAND, col_t(q, 3), col_t(q, 4), col_t(q, 1), 0);
      6:       return mk(OP_NAND, c,           col_t(q, 4), col_t(q, 2), 0);
      7:       return mk(OP_NAND, col_t(q, 1), col_t(q, 2), s,           0);
      default: return mk(OP_NAND, col_t(q, 4), col_t(q, 0), co,          0);
    endcase
  endfunction

  // The idx-th micro-operation of one dot-product pass (OP_NOP past the end).
  function automatic cram_op_t gen_op(int q, int l, int idx);
    int n;
    int w, carry, a, s;
    n = 0;
    // constant zero column
    if (n == idx) return mk(OP_CLR, 0, 0, col_z(q), 0);
    n++;
    // first multiplier row: P[i] = W[i] & X[0]; P[Q..2Q-1] = 0
    for (int i = 0; i < q; i++) begin
      if (n == idx) return mk(OP_NAND, col_w(i), col_x(q, 0), col_t(q, 6), 0);
      n++;
      if (n == idx) return mk(OP_NAND, col_t(q, 6), col_t(q, 6), col_p(q, i), 0);
      n++;
    end
    for (int i = 0; i < q; i++) begin
      if (n == idx) return mk(OP_CLR, 0, 0, col_p(q, q + i), 0);
      n++;
    end
    // multiplier rows j = 1..Q-1: P[j +: Q+1] = P[j +: Q] + (W & X[j])
    for (int j = 1; j < q; j++) begin
      for (int i = 0; i < q; i++) begin
        if (n == idx) return mk(OP_NAND, col_w(i), col_x(q, j), col_t(q, 6), 0);
        n++;
        if (n == idx) return mk(OP_NAND, col_t(q, 6), col_t(q, 6), col_pp(q, i), 0);
        n++;
      end
      for (int i = 0; i < q; i++) begin
        carry = (i == 0) ? col_z(q) : col_t(q, 5);
        a     = col_p(q, j + i);
        for (int k = 0; k < 9; k++) begin
          if (n == idx)
            return fa_step(q, k, a, col_pp(q, i), carry, a,
                           (i == q - 1) ? col_p(q, j + q) : col_t(q, 5));
          n++;
        end
      end
    end
    // in-CRAM tree levels: row r adds the partial sum of row r + 2^(lvl-1)
    for (int lvl = 1; lvl <= l; lvl++) begin
      w = 2*q + lvl - 1;
      for (int i = 0; i < w; i++) begin
        if (n == idx) return mk(OP_MOVE, col_lvl(q, l, lvl - 1, i), 0, col_b(q, lvl, i), lvl - 1);
        n++;
      end
      for (int i = 0; i < w; i++) begin
        carry = (i == 0) ? col_z(q) : col_t(q, 5);
        a     = col_lvl(q, l, lvl - 1, i);
        s     = col_lvl(q, l, lvl, i);
        for (int k = 0; k < 9; k++) begin
          if (n == idx)
            return fa_step(q, k, a, col_b(q, lvl, i), carry, s,
                           (i == w - 1) ? col_c(q, l, 0) : col_t(q, 5));
          n++;
        end
      end
      // the final carry is generated twice more, then voted back by EC
      if (n == idx) return mk(OP_NAND, col_t(q, 4), col_t(q, 0), col_c(q, l, 1), 0);
      n++;
      if (n == idx) return mk(OP_NAND, col_t(q, 4), col_t(q, 0), col_c(q, l, 2), 0);
      n++;
      if (n == idx) return mk(OP_EC, 0, 0, col_lvl(q, l, lvl, w), 0);
      n++;
    end
    return mk(OP_NOP, 0, 0, 0, 0);
  endfunction

endpackage
