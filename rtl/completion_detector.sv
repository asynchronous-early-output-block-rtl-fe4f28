// completion_detector: detects that a dual-rail bus is complete.
//
// One OR per bit tells whether that bit carries a code word; an N-input
// C-element joins them. The output rises only when every bit is valid and
// falls only when every bit is back to the spacer, so it can serve as the
// acknowledge of a 4-phase stage. The paper names the detector but not its
// circuit; this is the usual form, chosen here.
//
// Interface: dual-rail d (N bits); done.
// Timing: no clock.
module completion_detector
  import dr_pkg::*;
#(
  parameter int unsigned N = 1
) (
  input  dr_t [N-1:0] d,
  output logic        done
);

  logic [N-1:0] bit_valid;

  always_comb begin
    for (int i = 0; i < N; i++)
      bit_valid[i] = d[i].r1 | d[i].r0;
  end

  c_element #(.N(N)) u_c (.a(bit_valid), .y(done));

endmodule
