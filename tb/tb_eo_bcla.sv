// tb_eo_bcla: self-checking test of the 32-bit early output BCLA in all
// four architectures at once: regular carries only, regular and redundant
// carries (the default), and both of these with a 4-bit ripple carry adder
// in the low bits (the hybrid).
//
// Each word is applied as a 4-phase transaction. After the valid phase the
// sum and both carry outputs are compared with a + b + cin computed by the
// testbench. The spacer is then applied to A and B first, with the carry
// in still valid: in the redundant-carry adders the carry out must already
// be back at the spacer, since the redundant carries between BCLGs reset
// as soon as the operands do; in the regular-only adders, when every bit
// propagates, the chain of regular carries is held by its C-elements and
// the carry out must still be valid - the data-dependent reset the
// redundant carries remove. (In the regular-only hybrid the ripple carry
// adder's carry out is a plain product that resets with the operands, so
// that chain is not held either.) Finally the carry in returns to the spacer and
// every output must be spacer.
module tb_eo_bcla;
  import dr_pkg::*;
  localparam int W = 32;
  localparam int NV = 4;  // variants
  localparam int NWORDS = 3000;

  dr_t [W-1:0] a, b;
  dr_t cin;
  dr_t [W-1:0] sum [NV];
  dr_t cout [NV], red_cout [NV];
  int checks = 0, failures = 0;
  int held_regular = 0, reset_redundant = 0;

  // variant k: REDUNDANT = k[0], RCA_BITS = 4 * k[1]
  eo_bcla #(.WIDTH(W), .RCA_BITS(0), .REDUNDANT(1'b0)) dut0 (.a(a), .b(b), .cin(cin), .sum(sum[0]), .cout(cout[0]), .red_cout(red_cout[0]));
  eo_bcla #(.WIDTH(W), .RCA_BITS(0), .REDUNDANT(1'b1)) dut1 (.a(a), .b(b), .cin(cin), .sum(sum[1]), .cout(cout[1]), .red_cout(red_cout[1]));
  eo_bcla #(.WIDTH(W), .RCA_BITS(4), .REDUNDANT(1'b0)) dut2 (.a(a), .b(b), .cin(cin), .sum(sum[2]), .cout(cout[2]), .red_cout(red_cout[2]));
  eo_bcla #(.WIDTH(W), .RCA_BITS(4), .REDUNDANT(1'b1)) dut3 (.a(a), .b(b), .cin(cin), .sum(sum[3]), .cout(cout[3]), .red_cout(red_cout[3]));

  task automatic chk(input bit ok, input string what, input int k);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s variant %0d a=%h b=%h cin=%b", what, k, a, b, cin);
    end
  endtask

  function automatic dr_t [W-1:0] encw(input logic [W-1:0] v);
    dr_t [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = dr_enc(v[i]);
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0; cin = DR_SPACER; #1;
    for (int n = 0; n < NWORDS; n++) begin
      logic [W-1:0] va, vb;
      logic vc;
      logic [W:0] r;
      va = $urandom; vb = $urandom; vc = 1'($urandom);
      case (n % 8)
        1: vb = ~va;                      // every bit propagates
        2: begin va = '1; vb = '0; end    // full-length propagate
        3: begin va = '1; vb = 1; vc = 0; end
        default: ;
      endcase
      r = {1'b0, va} + {1'b0, vb} + {{W{1'b0}}, vc};
      a = encw(va); b = encw(vb); cin = dr_enc(vc); #1;
      for (int k = 0; k < NV; k++) begin
        chk(sum[k] == encw(r[W-1:0]), "sum", k);
        chk(cout[k] == dr_enc(r[W]), "cout", k);
        chk(red_cout[k] == dr_enc(r[W]), "red_cout", k);
      end
      a = '0; b = '0; #1;
      for (int k = 0; k < NV; k++) begin
        if (k == 0 && (va ^ vb) == '1) begin
          chk(cout[k] == dr_enc(r[W]), "regular carry chain held", k);
          held_regular++;
        end else begin
          chk(dr_is_spacer(cout[k]), "carry out resets with operands", k);
          if (k[0]) begin
            chk(dr_is_spacer(red_cout[k]), "redundant carry resets with operands", k);
            reset_redundant++;
          end
        end
      end
      cin = DR_SPACER; #1;
      for (int k = 0; k < NV; k++)
        chk(sum[k] == '0 && dr_is_spacer(cout[k]) && dr_is_spacer(red_cout[k]), "spacer", k);
    end
    chk(held_regular > 0 && reset_redundant > 0, "mechanisms", 0);
    $display("held_regular=%0d reset_redundant=%0d", held_regular, reset_redundant);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
