// tb_c_element: self-checking test of the Muller C-element.
// Drives a 2-input and a 3-input element through every input change of a
// random walk and compares each output with a reference that applies the
// rule directly: all inputs 1 -> 1, all 0 -> 0, otherwise unchanged.
module tb_c_element;
  logic [1:0] a2;
  logic [2:0] a3;
  logic       y2, y3;
  logic       ref2, ref3;
  int checks = 0, failures = 0;
  int holds = 0;

  c_element #(.N(2)) dut2 (.a(a2), .y(y2));
  c_element #(.N(3)) dut3 (.a(a3), .y(y3));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a2 = '0; a3 = '0; ref2 = 0; ref3 = 0;
    #1;
    for (int n = 0; n < 400; n++) begin
      a2 = 2'($urandom_range(3));
      a3 = 3'($urandom_range(7));
      if (&a2) ref2 = 1; else if (~|a2) ref2 = 0; else holds++;
      if (&a3) ref3 = 1; else if (~|a3) ref3 = 0;
      #1;
      checks += 2;
      if (y2 !== ref2) begin failures++; $display("N=2 a=%b y=%b exp=%b", a2, y2, ref2); end
      if (y3 !== ref3) begin failures++; $display("N=3 a=%b y=%b exp=%b", a3, y3, ref3); end
    end
    // explicit hold in both directions
    a2 = 2'b11; #1; a2 = 2'b01; #1; checks++; if (y2 !== 1) failures++;
    a2 = 2'b00; #1; a2 = 2'b10; #1; checks++; if (y2 !== 0) failures++;
    checks++; if (holds == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
