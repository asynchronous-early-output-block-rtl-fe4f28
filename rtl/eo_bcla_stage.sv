// eo_bcla_stage: the early output block carry lookahead adder wrapped as
// one asynchronous 4-phase stage.
//
// Data path: input register -> eo_bcla -> output register. A completion
// detector watches the output register. Its output is the stage's
// acknowledge towards the transmitter (ack_out); its inverse enables the
// input register, and the inverse of the receiver's acknowledge (ack_in)
// enables the output register.
//
// One transaction, seen from outside:
//   1. With the buses at the spacer, ack_out = 0 and ack_in = 0, the
//      transmitter drives a valid a, b, cin.
//   2. The sum and carry appear on sum/cout; when every output bit is
//      valid, ack_out rises (the transmitter's ACKIN, its inverse, falls)
//      and the input register closes to further data.
//   3. The receiver takes the result and raises ack_in; the transmitter,
//      seeing ack_out high, returns a, b, cin to the spacer.
//   4. The spacer runs through; when every output bit is spacer, ack_out
//      falls; the receiver lowers ack_in and the stage is ready again.
// The protocol, the dual-rail code and the presence of input and output
// registers and a completion detector come from the paper. How registers
// and detector are built and wired is this design's own choice.
//
// red_cout is the redundant carry out of the top BCLG, taken straight from
// the adder and not registered; nothing in the stage uses it.
//
// Interface: dual-rail a, b (WIDTH bits), cin; ack_in; dual-rail sum,
// cout, red_cout; ack_out.
// Timing: no clock. The loop input register -> adder -> output register ->
// detector -> input register enable is the handshake itself; it settles
// in each of the four phases. Lint reports this loop as circular
// combinational logic; it is the intended handshake loop of an
// asynchronous stage and is broken by the C-elements' state.
module eo_bcla_stage
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH     = 32,
  parameter int unsigned RCA_BITS  = 0,
  parameter bit          REDUNDANT = 1'b1
) (
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  input  dr_t             cin,
  output logic            ack_out,
  input  logic            ack_in,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout,
  output dr_t             red_cout
);

  localparam int unsigned NI = 2*WIDTH + 1;
  localparam int unsigned NO = WIDTH + 1;

  dr_t [NI-1:0]    in_q;
  dr_t [WIDTH-1:0] add_sum;
  dr_t             add_cout;

  dr_register #(.N(NI)) u_in_reg (
    .d  ({cin, b, a}),
    .en (~ack_out),
    .q  (in_q)
  );

  eo_bcla #(
    .WIDTH     (WIDTH),
    .RCA_BITS  (RCA_BITS),
    .REDUNDANT (REDUNDANT)
  ) u_adder (
    .a        (in_q[WIDTH-1:0]),
    .b        (in_q[2*WIDTH-1:WIDTH]),
    .cin      (in_q[2*WIDTH]),
    .sum      (add_sum),
    .cout     (add_cout),
    .red_cout (red_cout)
  );

  dr_register #(.N(NO)) u_out_reg (
    .d  ({add_cout, add_sum}),
    .en (~ack_in),
    .q  ({cout, sum})
  );

  completion_detector #(.N(NO)) u_cd (
    .d    ({cout, sum}),
    .done (ack_out)
  );

endmodule
