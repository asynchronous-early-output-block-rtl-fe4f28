// tb_eo_bcla_stage: end-to-end test of the adder stage at its default
// size (32 bits, redundant carries, no ripple carry section).
//
// The testbench plays the transmitter and the receiver of a 4-phase
// return-to-zero handshake and sends 1000 random operand words plus a set
// of corner words (all-propagate, all-generate, all-kill, carry into bit
// 32). Each transaction:
//   - A and B are made valid first, the carry in later. Before the carry
//     in arrives the stage must not acknowledge (bit 0 of the sum needs
//     it), but the carry out must already be valid whenever some bit of
//     the word generates or kills: the early output of the lookahead.
//   - With the carry in valid, ack_out must rise and sum/cout must equal
//     a + b + cin.
//   - On even words the transmitter returns to the spacer before the
//     receiver acknowledges: the output register must hold the result,
//     and the adder's redundant carry out must reset as soon as A and B
//     are spacer, while the carry in is still valid. On odd words the
//     receiver acknowledges first.
//   - After the receiver's acknowledge and the spacer, ack_out must fall
//     and every output bit must be spacer.
// Each of these mechanisms is counted and must occur at least once.
module tb_eo_bcla_stage;
  import dr_pkg::*;
  localparam int W = 32;
  localparam int NRANDOM = 1000;

  dr_t [W-1:0] a, b, sum;
  dr_t cin, cout, red_cout;
  logic ack_out, ack_in;

  int checks = 0, failures = 0;
  int n_transactions = 0, n_early_carry = 0, n_ack_withheld = 0;
  int n_result_held = 0, n_red_early_reset = 0, n_rx_first = 0;

  eo_bcla_stage dut (
    .a(a), .b(b), .cin(cin), .ack_out(ack_out), .ack_in(ack_in),
    .sum(sum), .cout(cout), .red_cout(red_cout)
  );

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s a=%h b=%h cin=%b sum=%h cout=%b ack_out=%b ack_in=%b",
                                  what, a, b, cin, sum, cout, ack_out, ack_in);
    end
  endtask

  function automatic dr_t [W-1:0] encw(input logic [W-1:0] v);
    dr_t [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = dr_enc(v[i]);
    return r;
  endfunction

  // No output bit may ever carry the illegal code (both rails high).
  always @(sum or cout) begin
    #0;
    for (int i = 0; i < W; i++) assert (!dr_is_illegal(sum[i])) else failures++;
    assert (!dr_is_illegal(cout)) else failures++;
  end

  task automatic transaction(input logic [W-1:0] va, input logic [W-1:0] vb, input logic vc, input bit rx_first);
    logic [W:0] r;
    r = {1'b0, va} + {1'b0, vb} + {{W{1'b0}}, vc};
    // phase 1: transmitter sends a code word, operands before carry in
    a = encw(va); b = encw(vb); #1;
    chk(ack_out == 1'b0, "no acknowledge before carry in");
    if (ack_out == 1'b0) n_ack_withheld++;
    if ((va ^ vb) != '1) begin
      chk(cout == dr_enc(r[W]), "early carry out");
      if (cout == dr_enc(r[W])) n_early_carry++;
    end else
      chk(dr_is_spacer(cout), "carry out waits for carry in");
    cin = dr_enc(vc); #1;
    // phase 2: result complete, stage acknowledges
    chk(ack_out == 1'b1, "ack_out rises");
    chk(sum == encw(r[W-1:0]), "sum");
    chk(cout == dr_enc(r[W]), "cout");
    chk(red_cout == dr_enc(r[W]), "red_cout");
    if (!rx_first) begin
      // phase 3 before the receiver takes the result
      a = '0; b = '0; #1;
      chk(dr_is_spacer(red_cout), "redundant carry resets early");
      if (dr_is_spacer(red_cout)) n_red_early_reset++;
      cin = DR_SPACER; #1;
      chk(sum == encw(r[W-1:0]) && cout == dr_enc(r[W]) && ack_out, "output register holds result");
      if (sum == encw(r[W-1:0])) n_result_held++;
      ack_in = 1'b1; #1;
    end else begin
      ack_in = 1'b1; #1;
      chk(sum == encw(r[W-1:0]) && ack_out, "result stable after receiver acknowledge");
      n_rx_first++;
      a = '0; b = '0; cin = DR_SPACER; #1;
    end
    // phase 4
    chk(ack_out == 1'b0, "ack_out falls");
    chk(sum == '0 && dr_is_spacer(cout), "outputs spacer");
    ack_in = 1'b0; #1;
    n_transactions++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] corner_a [8];
    logic [W-1:0] corner_b [8];
    corner_a = '{32'h0, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'hAAAA_AAAA, 32'h8000_0000, 32'h0F0F_0F0F, 32'h7FFF_FFFF, 32'h1234_5678};
    corner_b = '{32'h0, 32'h0,         32'hFFFF_FFFF, 32'h5555_5555, 32'h8000_0000, 32'hF0F0_F0F0, 32'h0000_0001, 32'hEDCB_A987};
    a = '0; b = '0; cin = DR_SPACER; ack_in = 1'b0; #1;
    chk(ack_out == 1'b0 && sum == '0, "stage empty after spacer");
    for (int i = 0; i < 8; i++)
      for (int c = 0; c < 2; c++)
        for (int m = 0; m < 2; m++)
          transaction(corner_a[i], corner_b[i], 1'(c), 1'(m));
    for (int n = 0; n < NRANDOM; n++)
      transaction($urandom, $urandom, 1'($urandom), 1'(n % 2));
    chk(n_transactions == 32 + NRANDOM, "transaction count");
    chk(n_early_carry > 0,     "early carry seen");
    chk(n_ack_withheld > 0,    "acknowledge withheld seen");
    chk(n_result_held > 0,     "output hold seen");
    chk(n_red_early_reset > 0, "redundant carry early reset seen");
    chk(n_rx_first > 0,        "receiver-first order seen");
    $display("transactions=%0d early_carry=%0d ack_withheld=%0d result_held=%0d red_early_reset=%0d rx_first=%0d",
             n_transactions, n_early_carry, n_ack_withheld, n_result_held, n_red_early_reset, n_rx_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
