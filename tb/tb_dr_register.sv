// tb_dr_register: self-checking test of the dual-rail register bank.
// Checks that valid data passes while enabled, is held once the enable
// falls, that the spacer passes only while the enable is low, and that a
// new word is blocked until the enable rises again.
module tb_dr_register;
  import dr_pkg::*;
  localparam int N = 4;
  dr_t [N-1:0] d, q;
  logic en;
  int checks = 0, failures = 0;

  dr_register #(.N(N)) dut (.d(d), .en(en), .q(q));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s d=%b en=%b q=%b", what, d, en, q); end
  endtask

  function automatic dr_t [N-1:0] encn(input logic [N-1:0] v);
    dr_t [N-1:0] r;
    for (int i = 0; i < N; i++) r[i] = dr_enc(v[i]);
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0; en = 1'b1; #1;
    chk(q == '0, "initial spacer");
    for (int n = 0; n < 64; n++) begin
      logic [N-1:0] v, w;
      v = N'($urandom); w = ~v;
      d = encn(v); #1;                chk(q == encn(v), "valid passes");
      en = 1'b0; #1;                  chk(q == encn(v), "held after enable falls");
      d = '0; #1;                     chk(q == '0, "spacer passes with enable low");
      d = encn(w); #1;                chk(q == '0, "new word blocked");
      d = '0; #1;
      en = 1'b1; #1;                  chk(q == '0, "spacer held with enable high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
