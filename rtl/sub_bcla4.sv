// sub_bcla4: one 4-bit section of the early output block carry lookahead
// adder.
//
// Inside the section the carry ripples: three early output full adders
// (bits 0..2) and one sum logic cell (bit 3) take the section's regular
// carry-in and produce the four sum bits. Across sections the carry is
// looked ahead: the section's BCLG computes the carry out of bit 3 from the
// operands and its own carry input, so the next section need not wait for
// the ripple. The two carry inputs are separate ports because in the
// redundant-carry adder the BCLG is fed the previous section's redundant
// carry while the sum chain is fed its regular carry; in the regular-only
// adder both ports get the same signal. This split follows the paper's
// description; the port names are this design's own.
//
// Interface: dual-rail a[3:0], b[3:0], cin (sum chain), cin_la (BCLG);
// dual-rail sum[3:0], cout (regular) and red_cout (redundant).
// Timing: no clock.
module sub_bcla4
  import dr_pkg::*;
(
  input  dr_t [3:0] a,
  input  dr_t [3:0] b,
  input  dr_t       cin,
  input  dr_t       cin_la,
  output dr_t [3:0] sum,
  output dr_t       cout,
  output dr_t       red_cout
);

  dr_t [3:1] c;  // ripple carries into bits 1..3

  bclg4 u_bclg (
    .a        (a),
    .b        (b),
    .cin      (cin_la),
    .cout     (cout),
    .red_cout (red_cout)
  );

  eo_fa u_fa0 (.a(a[0]), .b(b[0]), .cin(cin),  .sum(sum[0]), .cout(c[1]));
  eo_fa u_fa1 (.a(a[1]), .b(b[1]), .cin(c[1]), .sum(sum[1]), .cout(c[2]));
  eo_fa u_fa2 (.a(a[2]), .b(b[2]), .cin(c[2]), .sum(sum[2]), .cout(c[3]));
  eo_sl u_sl3 (.a(a[3]), .b(b[3]), .cin(c[3]), .sum(sum[3]));

endmodule
