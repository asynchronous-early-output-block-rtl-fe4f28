// eo_rca: early output dual-rail ripple carry adder.
//
// A chain of WIDTH early output full adders (eo_fa). The hybrid adder
// uses four of them for bits 0..3, where a ripple is shorter than the
// first, slowest lookahead generator; their carry out (C4) feeds the first
// 4-bit section. Because every full adder can produce its carry from a
// generate or kill alone, the ripple usually stops early.
//
// Interface: dual-rail a, b (WIDTH bits), cin; dual-rail sum, cout.
// Timing: no clock.
module eo_rca
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH = 4
) (
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  input  dr_t             cin,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout
);

  dr_t [WIDTH:0] c;

  assign c[0] = cin;
  assign cout = c[WIDTH];

  for (genvar i = 0; i < WIDTH; i++) begin : g_fa
    eo_fa u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
  end

endmodule
