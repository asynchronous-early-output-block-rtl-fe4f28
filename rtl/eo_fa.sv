// eo_fa: early output dual-rail full adder.
//
// Two first-level products split the operand pair by parity:
//   E = A0B0 + A1B1   (A and B equal, half sum 0)
//   D = A0B1 + A1B0   (A and B differ, half sum 1)
// The sum rails are formed by C-elements joining the carry-in rails with
// E or D, so a sum bit is valid only once the carry-in has arrived, and it
// returns to the spacer only once the carry-in and the operands have all
// returned:
//   SUM1 = C(CIN1, E) + C(CIN0, D)
//   SUM0 = C(CIN0, E) + C(CIN1, D)
// The carry output is in disjoint sum-of-products form,
//   COUT1 = CIN1*D + A1B1,   COUT0 = CIN0*D + A0B0,
// so a generate (A1B1) or kill (A0B0) produces the carry without waiting
// for the carry-in: the "early output" that shortens the carry ripple.
// The structure (which products feed which C-elements, and the output
// names) follows the adder's full adder figure; the exact AND/OR shapes of
// the plain gates are written as the equations above require.
//
// Interface: dual-rail a, b, cin in; dual-rail sum, cout out.
// Timing: no clock; purely combinational apart from the C-element state.
module eo_fa
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  logic e, d;          // operands equal / differ
  logic s1_e, s1_d;    // C-element terms of SUM1
  logic s0_e, s0_d;    // C-element terms of SUM0

  always_comb begin
    e = (a.r0 & b.r0) | (a.r1 & b.r1);
    d = (a.r0 & b.r1) | (a.r1 & b.r0);
  end

  c_element #(.N(2)) u_s1_e (.a({cin.r1, e}), .y(s1_e));
  c_element #(.N(2)) u_s1_d (.a({cin.r0, d}), .y(s1_d));
  c_element #(.N(2)) u_s0_e (.a({cin.r0, e}), .y(s0_e));
  c_element #(.N(2)) u_s0_d (.a({cin.r1, d}), .y(s0_d));

  always_comb begin
    sum.r1  = s1_e | s1_d;
    sum.r0  = s0_e | s0_d;
    cout.r1 = (cin.r1 & d) | (a.r1 & b.r1);
    cout.r0 = (cin.r0 & d) | (a.r0 & b.r0);
  end

endmodule
