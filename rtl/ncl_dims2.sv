// ncl_dims2: dual-rail two-input gate of any Boolean function, built in the
// delay-insensitive minterm synthesis (DIMS) style.
//
// Four TH22 gates (C-elements) detect the four minterms of the dual-rail
// inputs a and b; the true rail of the output ORs the minterms for which the
// truth table TT is 1 and the false rail ORs the others. The gate is input
// complete: the output becomes DATA only after both inputs are DATA, and
// returns to NULL only after both inputs are NULL. An illegal (DATAX) input
// can raise two minterms and so give a DATAX output, which is how an SEU in
// the logic shows up at its outputs. TT is indexed by {a,b}: TT_AND, TT_OR
// and TT_XOR are in ncl_pkg.
//
// Inside an SR-NCL pipeline a lint tool reports the minterm latches as part
// of a circular combinational path; that is the asynchronous handshake loop
// of the pipeline closing through latch-modelled C-elements (see ncl_thnn),
// and it is intended.
module ncl_dims2
  import ncl_pkg::*;
#(
  parameter logic [3:0] TT = TT_AND
) (
  input  logic rst,
  input  dr_t  a,
  input  dr_t  b,
  output dr_t  z
);

  logic [3:0] m;

  for (genvar k = 0; k < 4; k++) begin : g_min
    localparam bit AV = k[1];
    localparam bit BV = k[0];
    ncl_thnn #(.N(2)) u_c (
      .rst(rst),
      .a  ({AV ? a.r1 : a.r0, BV ? b.r1 : b.r0}),
      .z  (m[k])
    );
  end

  assign z.r1 = |(m & TT);
  assign z.r0 = |(m & ~TT);

endmodule
