// bclg4: 4-bit early output block carry lookahead generator with regular
// and redundant carry outputs.
//
// From four dual-rail operand pairs it forms, per bit,
//   G_i = A_i1 B_i1 (generate),  P_i = A_i1 B_i0 + A_i0 B_i1 (propagate),
//   K_i = A_i0 B_i0 (kill),
// and evaluates the block carry in disjoint sum-of-products form:
//   C41 = G3 + P3G2 + P3P2G1 + P3P2P1G0 + P3P2P1P0 C01
//   C40 = K3 + P3K2 + P3P2K1 + P3P2P1K0 + P3P2P1P0 C00
// Every product of two or more terms is built from 2-input C-elements in
// three levels (P3G2, P3K2, P3P2; then x G1, x K1, x P1; then x G0, x K0,
// x P0), so a product stays high until its inputs have all returned to the
// spacer. The four carry-in-independent terms are ORed per rail; the term
// with the carry-in is added in the last level, in two ways:
//   regular   (C41, C40):       C-element of carry-in rail and P3P2P1P0
//   redundant (RedC41, RedC40): plain AND of carry-in rail and P3P2P1P0
// Both give the same value on valid data. On the spacer the redundant
// carry falls as soon as either the carry-in or the operands are gone,
// while the regular one waits for both; that shorter reset path is what
// the redundant carry is for. The equations, the generate/propagate/kill
// names, the C-element in the regular last level and its absence in the
// redundant one follow the adder's BCLG figure; the assignment of the
// nine inner C-elements to products is read from the equations.
//
// Interface: dual-rail a[3:0], b[3:0], cin in; dual-rail cout (regular)
// and red_cout (redundant) out.
// Timing: no clock.
module bclg4
  import dr_pkg::*;
(
  input  dr_t [3:0] a,
  input  dr_t [3:0] b,
  input  dr_t       cin,
  output dr_t       cout,
  output dr_t       red_cout
);

  logic [3:0] g, p, k;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      g[i] = a[i].r1 & b[i].r1;
      p[i] = (a[i].r1 & b[i].r0) | (a[i].r0 & b[i].r1);
      k[i] = a[i].r0 & b[i].r0;
    end
  end

  // Level 1: products with P3
  logic p3g2, p3k2, p3p2;
  c_element #(.N(2)) u_p3g2 (.a({p[3], g[2]}), .y(p3g2));
  c_element #(.N(2)) u_p3k2 (.a({p[3], k[2]}), .y(p3k2));
  c_element #(.N(2)) u_p3p2 (.a({p[3], p[2]}), .y(p3p2));

  // Level 2: products with P3P2
  logic p3p2g1, p3p2k1, p3p2p1;
  c_element #(.N(2)) u_p3p2g1 (.a({p3p2, g[1]}), .y(p3p2g1));
  c_element #(.N(2)) u_p3p2k1 (.a({p3p2, k[1]}), .y(p3p2k1));
  c_element #(.N(2)) u_p3p2p1 (.a({p3p2, p[1]}), .y(p3p2p1));

  // Level 3: products with P3P2P1
  logic p3p2p1g0, p3p2p1k0, pall;
  c_element #(.N(2)) u_p3p2p1g0 (.a({p3p2p1, g[0]}), .y(p3p2p1g0));
  c_element #(.N(2)) u_p3p2p1k0 (.a({p3p2p1, k[0]}), .y(p3p2p1k0));
  c_element #(.N(2)) u_pall     (.a({p3p2p1, p[0]}), .y(pall));

  // Carry-in-independent part of each rail
  logic gen1, gen0;
  always_comb begin
    gen1 = g[3] | p3g2 | p3p2g1 | p3p2p1g0;
    gen0 = k[3] | p3k2 | p3p2k1 | p3p2p1k0;
  end

  // Regular last level: C-element with the carry-in
  logic reg_t1, reg_t0;
  c_element #(.N(2)) u_reg1 (.a({cin.r1, pall}), .y(reg_t1));
  c_element #(.N(2)) u_reg0 (.a({cin.r0, pall}), .y(reg_t0));

  always_comb begin
    cout.r1     = gen1 | reg_t1;
    cout.r0     = gen0 | reg_t0;
    // Redundant last level: plain product, resets early
    red_cout.r1 = gen1 | (cin.r1 & pall);
    red_cout.r0 = gen0 | (cin.r0 & pall);
  end

endmodule
