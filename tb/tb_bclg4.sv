// tb_bclg4: self-checking test of the 4-bit block carry lookahead
// generator, over all 512 combinations of A, B and carry-in.
// Per combination: A,B first - the carry (regular and redundant) must
// already be valid and correct unless all four bits propagate, in which
// case it must wait for the carry-in; then the carry-in - both outputs
// equal the carry out of A + B + Cin; then A,B back to the spacer with the
// carry-in still valid - the redundant carry must reset at once, while the
// regular carry is held exactly when all four bits propagated (its
// C-element still sees the carry-in); finally everything spacer.
module tb_bclg4;
  import dr_pkg::*;
  dr_t [3:0] a, b;
  dr_t cin, cout, red_cout;
  int checks = 0, failures = 0;
  int early = 0, red_early_reset = 0, reg_held = 0;

  bclg4 dut (.a(a), .b(b), .cin(cin), .cout(cout), .red_cout(red_cout));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s a=%h b=%h cin=%b c=%b red=%b", what, a, b, cin, cout, red_cout); end
  endtask

  function automatic dr_t [3:0] enc4(input logic [3:0] v);
    dr_t [3:0] r;
    for (int i = 0; i < 4; i++) r[i] = dr_enc(v[i]);
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0; cin = DR_SPACER; #1;
    for (int v = 0; v < 512; v++) begin
      logic [3:0] va, vb;
      logic vc, c4, allp;
      {va, vb, vc} = 9'(v);
      c4   = 5'({1'b0, va} + {1'b0, vb} + {4'b0, vc}) >> 4;
      allp = ((va ^ vb) == 4'hF);
      a = enc4(va); b = enc4(vb); #1;
      if (!allp) begin
        chk(cout == dr_enc(c4) && red_cout == dr_enc(c4), "early carry");
        early++;
      end else
        chk(dr_is_spacer(cout) && dr_is_spacer(red_cout), "carry waits for cin");
      cin = dr_enc(vc); #1;
      chk(cout == dr_enc(c4), "regular carry");
      chk(red_cout == dr_enc(c4), "redundant carry");
      a = '0; b = '0; #1;
      chk(dr_is_spacer(red_cout), "redundant carry resets early");
      red_early_reset++;
      if (allp) begin
        chk(cout == dr_enc(c4), "regular carry held by C-element");
        reg_held++;
      end else
        chk(dr_is_spacer(cout), "regular carry reset");
      cin = DR_SPACER; #1;
      chk(dr_is_spacer(cout) && dr_is_spacer(red_cout), "spacer");
    end
    chk(early > 0 && red_early_reset > 0 && reg_held > 0, "mechanisms");
    $display("early=%0d red_early_reset=%0d reg_held=%0d", early, red_early_reset, reg_held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
