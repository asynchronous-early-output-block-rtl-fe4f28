// eo_sl: early output dual-rail sum logic.
//
// The sum half of the early output full adder (eo_fa) with no carry
// output. It computes the most significant bit of each 4-bit section,
// whose carry is produced instead by the section's carry lookahead
// generator:
//   E = A0B0 + A1B1,  D = A0B1 + A1B0
//   SUM1 = C(CIN1, E) + C(CIN0, D),  SUM0 = C(CIN0, E) + C(CIN1, D)
// The C-elements hold the sum until both the operands and the carry-in
// have returned to the spacer. Structure as in the adder's sum logic
// figure; gate shapes as the equations require.
//
// Interface: dual-rail a, b, cin in; dual-rail sum out.
// Timing: no clock.
module eo_sl
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum
);

  logic e, d;
  logic s1_e, s1_d, s0_e, s0_d;

  always_comb begin
    e = (a.r0 & b.r0) | (a.r1 & b.r1);
    d = (a.r0 & b.r1) | (a.r1 & b.r0);
  end

  c_element #(.N(2)) u_s1_e (.a({cin.r1, e}), .y(s1_e));
  c_element #(.N(2)) u_s1_d (.a({cin.r0, d}), .y(s1_d));
  c_element #(.N(2)) u_s0_e (.a({cin.r0, e}), .y(s0_e));
  c_element #(.N(2)) u_s0_d (.a({cin.r1, d}), .y(s0_d));

  always_comb begin
    sum.r1 = s1_e | s1_d;
    sum.r0 = s0_e | s0_d;
  end

endmodule
