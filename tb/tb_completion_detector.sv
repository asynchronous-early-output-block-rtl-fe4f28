// tb_completion_detector: self-checking test of the completion detector.
// Random orders of bits becoming valid and then spacer: done must stay 0
// until the last bit is valid, and stay 1 until the last bit is spacer.
module tb_completion_detector;
  import dr_pkg::*;
  localparam int N = 5;
  dr_t [N-1:0] d;
  logic done;
  int checks = 0, failures = 0;

  completion_detector #(.N(N)) dut (.d(d), .done(done));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s d=%b done=%b", what, d, done); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0; #1;
    chk(done == 1'b0, "initial");
    for (int n = 0; n < 50; n++) begin
      int order[N];
      for (int i = 0; i < N; i++) order[i] = i;
      order.shuffle();
      for (int i = 0; i < N; i++) begin
        d[order[i]] = dr_enc(1'($urandom)); #1;
        chk(done == (i == N-1), "rise only when all valid");
      end
      order.shuffle();
      for (int i = 0; i < N; i++) begin
        d[order[i]] = DR_SPACER; #1;
        chk(done == (i != N-1), "fall only when all spacer");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
