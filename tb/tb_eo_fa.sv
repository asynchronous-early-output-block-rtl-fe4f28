// tb_eo_fa: self-checking test of the early output full adder.
// For all eight operand combinations it runs the 4-phase sequence
// spacer -> A,B -> carry-in -> carry-in spacer -> A,B spacer and checks:
// the carry appears before the carry-in when A = B (generate or kill),
// the sum waits for the carry-in, both are correct on valid data, the sum
// is held while only the carry-in has returned to the spacer, and every
// output returns to the spacer at the end.
module tb_eo_fa;
  import dr_pkg::*;
  dr_t a, b, cin, sum, cout;
  int checks = 0, failures = 0;
  int early_carry = 0, sum_held = 0;

  eo_fa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s a=%b b=%b cin=%b sum=%b cout=%b", what, a, b, cin, sum, cout); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = DR_SPACER; b = DR_SPACER; cin = DR_SPACER; #1;
    for (int rep = 0; rep < 2; rep++)
    for (int v = 0; v < 8; v++) begin
      logic va, vb, vc;
      {va, vb, vc} = 3'(v);
      if (rep == 0) begin
        a = dr_enc(va); b = dr_enc(vb); #1;
        chk(dr_is_spacer(sum), "sum before cin");
        if (va == vb) begin
          chk(cout == dr_enc(va), "early carry");
          early_carry++;
        end else chk(dr_is_spacer(cout), "carry waits for cin");
        cin = dr_enc(vc); #1;
      end else begin
        cin = dr_enc(vc); #1;
        chk(dr_is_spacer(sum) && dr_is_spacer(cout), "cin alone");
        a = dr_enc(va); b = dr_enc(vb); #1;
      end
      chk(sum == dr_enc(va ^ vb ^ vc), "sum");
      chk(cout == dr_enc((va & vb) | (vc & (va ^ vb))), "cout");
      cin = DR_SPACER; #1;
      chk(sum == dr_enc(va ^ vb ^ vc), "sum held");
      sum_held++;
      a = DR_SPACER; b = DR_SPACER; #1;
      chk(dr_is_spacer(sum) && dr_is_spacer(cout), "spacer");
    end
    chk(early_carry > 0 && sum_held > 0, "mechanisms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
