// tb_workload_architectures: the random-vector workload applied to all
// four 32-bit architectures, each wrapped as a complete 4-phase stage.
//
// Four eo_bcla_stage instances share the operand bus: regular carries
// only, regular and redundant carries (the default), and the two hybrids
// with a 4-bit ripple carry adder in the low bits. The testbench is one
// transmitter forking to all four and one receiver joining their results:
// it sends 1000 random words (with a random carry in), waits until every
// stage has acknowledged, compares every sum and carry out with a + b + cin,
// then returns to the spacer and waits until every acknowledge has fallen.
module tb_workload_architectures;
  import dr_pkg::*;
  localparam int W = 32;
  localparam int NV = 4;
  localparam int NWORDS = 1000;

  dr_t [W-1:0] a, b;
  dr_t cin;
  dr_t [W-1:0] sum [NV];
  dr_t cout [NV], red_cout [NV];
  logic [NV-1:0] ack_out;
  logic ack_in;
  int checks = 0, failures = 0;

  eo_bcla_stage #(.WIDTH(W), .RCA_BITS(0), .REDUNDANT(1'b0)) s0 (.a(a), .b(b), .cin(cin), .ack_out(ack_out[0]), .ack_in(ack_in), .sum(sum[0]), .cout(cout[0]), .red_cout(red_cout[0]));
  eo_bcla_stage #(.WIDTH(W), .RCA_BITS(0), .REDUNDANT(1'b1)) s1 (.a(a), .b(b), .cin(cin), .ack_out(ack_out[1]), .ack_in(ack_in), .sum(sum[1]), .cout(cout[1]), .red_cout(red_cout[1]));
  eo_bcla_stage #(.WIDTH(W), .RCA_BITS(4), .REDUNDANT(1'b0)) s2 (.a(a), .b(b), .cin(cin), .ack_out(ack_out[2]), .ack_in(ack_in), .sum(sum[2]), .cout(cout[2]), .red_cout(red_cout[2]));
  eo_bcla_stage #(.WIDTH(W), .RCA_BITS(4), .REDUNDANT(1'b1)) s3 (.a(a), .b(b), .cin(cin), .ack_out(ack_out[3]), .ack_in(ack_in), .sum(sum[3]), .cout(cout[3]), .red_cout(red_cout[3]));

  function automatic dr_t [W-1:0] encw(input logic [W-1:0] v);
    dr_t [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = dr_enc(v[i]);
    return r;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0; cin = DR_SPACER; ack_in = 1'b0; #1;
    for (int n = 0; n < NWORDS; n++) begin
      logic [W-1:0] va, vb;
      logic vc;
      logic [W:0] r;
      va = $urandom; vb = $urandom; vc = 1'($urandom);
      r = {1'b0, va} + {1'b0, vb} + {{W{1'b0}}, vc};
      a = encw(va); b = encw(vb); cin = dr_enc(vc);
      #1;
      checks++;
      if (ack_out != '1) begin failures++; $display("word %0d: ack_out=%b", n, ack_out); end
      for (int k = 0; k < NV; k++) begin
        checks++;
        if (sum[k] != encw(r[W-1:0]) || cout[k] != dr_enc(r[W])) begin
          failures++;
          if (failures < 20) $display("word %0d arch %0d: a=%h b=%h cin=%0d wrong result", n, k, va, vb, vc);
        end
      end
      ack_in = 1'b1; #1;
      a = '0; b = '0; cin = DR_SPACER; #1;
      checks++;
      if (ack_out != '0) begin failures++; $display("word %0d: ack_out stuck %b", n, ack_out); end
      ack_in = 1'b0; #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
