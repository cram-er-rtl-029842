// ec_maj3 - selective error-correction (EC) voter of one CRAM-ER row.
//
// The final carry of each in-CRAM addition is produced three times into three
// sense-amp-read columns of the row. This block outputs their majority, which
// the array then writes back as the corrected carry. A single wrong copy is
// outvoted; two wrong copies are not. It is purely combinational.
//
// Follows the source paper: the EC circuit is a MAJ3 of the three carry copies
// (C_out^1, C_out^2, C_out^3 -> C_out), one per row. The gate-level form is
// left to synthesis.
module ec_maj3 (
  input  logic [2:0] c_copies,   // C_out^1..C_out^3 as read by the sense amps
  output logic       c_out       // majority, written back as the final carry
);
  always_comb c_out = (c_copies[0] & c_copies[1]) |
                      (c_copies[0] & c_copies[2]) |
                      (c_copies[1] & c_copies[2]);
endmodule
