// ncl_thnn: NCL THnn threshold gate with hysteresis (an N-input Muller
// C-element), with an asynchronous reset to 0 (the "n" reset variant of NCL
// gates).
//
// The output rises when all N inputs are 1, falls when all N inputs are 0,
// and otherwise holds its value. TH22 (N=2) and TH33 (N=3) are the gates the
// SR-NCL registers, TH22 merge layers and DIMS logic are built from.
//
// The hold state is written as a level-sensitive latch whose enable is
// "all inputs equal": that is the behaviour of a C-element without a
// combinational feedback loop, so every such gate shows up as one latch bit
// in synthesis reports. Timing: zero delay; the gate settles in the same
// simulation step as its inputs.
//
// Lint tools that treat latches as combinational logic report a circular
// path through this gate once it sits in an NCL pipeline: that path is the
// self-timed handshake loop (data -> completion detector -> Ki -> register),
// which is how NCL works and cannot be removed. The gates are what closes
// the loop with state, so simulation settles after each input change.
module ncl_thnn #(
  parameter int unsigned N = 2
) (
  input  logic         rst,
  input  logic [N-1:0] a,
  output logic         z
);

  always_latch begin
    if (rst)          z = 1'b0;
    else if (&a)      z = 1'b1;
    else if (~|a)     z = 1'b0;
  end

endmodule
