// tb_eo_rca: self-checking test of the 4-bit early output ripple carry
// adder, over all 512 combinations of A, B and carry-in, with the 4-phase
// return to the spacer after each word.
module tb_eo_rca;
  import dr_pkg::*;
  dr_t [3:0] a, b, sum;
  dr_t cin, cout;
  int checks = 0, failures = 0;

  eo_rca #(.WIDTH(4)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s a=%h b=%h cin=%b sum=%h c=%b", what, a, b, cin, sum, cout); end
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
      logic vc;
      logic [4:0] r;
      {va, vb, vc} = 9'(v);
      r = {1'b0, va} + {1'b0, vb} + {4'b0, vc};
      a = enc4(va); b = enc4(vb); cin = dr_enc(vc); #1;
      chk(sum == enc4(r[3:0]), "sum");
      chk(cout == dr_enc(r[4]), "cout");
      a = '0; b = '0; cin = DR_SPACER; #1;
      chk(sum == '0 && dr_is_spacer(cout), "spacer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
