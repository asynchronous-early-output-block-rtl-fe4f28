// tb_sub_bcla4: self-checking test of one 4-bit adder section, over all
// 512 combinations of A, B and carry-in (both carry inputs driven alike,
// as in the first section). Checks the four sum bits, the regular and the
// redundant carry out against A + B + Cin, and the return to the spacer.
// A second pass feeds the BCLG's carry input later than the sum chain's to
// show that the two paths are separate.
module tb_sub_bcla4;
  import dr_pkg::*;
  dr_t [3:0] a, b, sum;
  dr_t cin, cin_la, cout, red_cout;
  int checks = 0, failures = 0;

  sub_bcla4 dut (.a(a), .b(b), .cin(cin), .cin_la(cin_la), .sum(sum), .cout(cout), .red_cout(red_cout));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s a=%h b=%h cin=%b sum=%h c=%b red=%b", what, a, b, cin, sum, cout, red_cout); end
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
    a = '0; b = '0; cin = DR_SPACER; cin_la = DR_SPACER; #1;
    for (int pass = 0; pass < 2; pass++)
    for (int v = 0; v < 512; v++) begin
      logic [3:0] va, vb;
      logic vc;
      logic [4:0] r;
      {va, vb, vc} = 9'(v);
      r = {1'b0, va} + {1'b0, vb} + {4'b0, vc};
      a = enc4(va); b = enc4(vb); cin = dr_enc(vc);
      if (pass == 0) cin_la = dr_enc(vc);
      #1;
      chk(sum == enc4(r[3:0]), "sum");
      if (pass == 1) begin
        if ((va ^ vb) == 4'hF)
          chk(dr_is_spacer(cout) && dr_is_spacer(red_cout), "BCLG waits for its own carry input");
        cin_la = dr_enc(vc); #1;
      end
      chk(cout == dr_enc(r[4]), "cout");
      chk(red_cout == dr_enc(r[4]), "red_cout");
      a = '0; b = '0; cin = DR_SPACER; cin_la = DR_SPACER; #1;
      chk(sum == '0 && dr_is_spacer(cout) && dr_is_spacer(red_cout), "spacer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
