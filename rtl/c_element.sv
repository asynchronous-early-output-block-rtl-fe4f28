// c_element: N-input Muller C-element.
//
// The output rises when every input is 1, falls when every input is 0, and
// keeps its value while the inputs disagree. This hysteresis is what lets
// an asynchronous circuit acknowledge ("indicate") that all of its inputs
// have arrived, or have all returned to the spacer. The adder's gate-level
// figures mark these elements with a C; the behaviour above is the one the
// adder relies on.
//
// The element is written as a level-sensitive latch that is transparent
// whenever all inputs are equal, so synthesis maps it to a latch plus an
// equality detect. The latch that lint and synthesis report is therefore
// intended: a C-element is a state-holding gate (a lint pass may also say,
// for some instances, that it finds no latch in the block; the block holds
// its value whenever the inputs disagree all the same). There is no reset pin:
// driving all inputs to 0 (the spacer) clears it, and the 4-phase protocol
// does that after every data word.
//
// Timing: no clock; the output follows the inputs as soon as they agree.
module c_element #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] a,
  output logic         y
);

  // Transparent while all inputs agree; then any input bit is the value.
  always_latch begin
    if ((&a) | ~(|a))
      y = a[0];
  end

endmodule
