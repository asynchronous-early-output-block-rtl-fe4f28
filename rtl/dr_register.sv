// dr_register: dual-rail register bank for a 4-phase pipeline stage.
//
// Every rail of every bit passes through a 2-input C-element whose other
// input is the enable. The enable is the inverted acknowledge of the stage
// that follows: while that stage is empty (en = 1) valid data is let
// through and then held; once it has taken the data (en = 0) the spacer is
// let through and then held. The result is a one-word asynchronous latch
// that never lets a new word overwrite one not yet taken. The adder's
// input and output registers are only named in the paper; this is the
// common QDI form, chosen here.
//
// Interface: dual-rail d (N bits), enable en; dual-rail q.
// Timing: no clock; q follows d whenever d and en agree.
module dr_register
  import dr_pkg::*;
#(
  parameter int unsigned N = 1
) (
  input  dr_t [N-1:0] d,
  input  logic        en,
  output dr_t [N-1:0] q
);

  for (genvar i = 0; i < N; i++) begin : g_bit
    c_element #(.N(2)) u_r1 (.a({d[i].r1, en}), .y(q[i].r1));
    c_element #(.N(2)) u_r0 (.a({d[i].r0, en}), .y(q[i].r0));
  end

endmodule
