// tb_eo_sl: self-checking test of the early output sum logic.
// All eight operand combinations through the 4-phase sequence; the sum
// must wait for the carry-in, be correct, be held while only the carry-in
// has returned to the spacer, and return to the spacer at the end.
module tb_eo_sl;
  import dr_pkg::*;
  dr_t a, b, cin, sum;
  int checks = 0, failures = 0;

  eo_sl dut (.a(a), .b(b), .cin(cin), .sum(sum));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s a=%b b=%b cin=%b sum=%b", what, a, b, cin, sum); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = DR_SPACER; b = DR_SPACER; cin = DR_SPACER; #1;
    for (int v = 0; v < 8; v++) begin
      logic va, vb, vc;
      {va, vb, vc} = 3'(v);
      a = dr_enc(va); b = dr_enc(vb); #1;
      chk(dr_is_spacer(sum), "sum before cin");
      cin = dr_enc(vc); #1;
      chk(sum == dr_enc(va ^ vb ^ vc), "sum");
      cin = DR_SPACER; #1;
      chk(sum == dr_enc(va ^ vb ^ vc), "sum held");
      a = DR_SPACER; b = DR_SPACER; #1;
      chk(dr_is_spacer(sum), "spacer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
