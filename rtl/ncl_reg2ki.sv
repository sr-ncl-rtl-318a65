// ncl_reg2ki: N-bit dual-rail NCL register with two Ki inputs.
//
// A plain NCL register is one TH22 gate per rail, joining the rail with the
// Ki from the next stage's completion detector. In SR-NCL each register has
// two Ki inputs, one from the original (a) and one from the duplicate (b)
// completion detector of the next stage, so each rail is a TH33 gate: a rail
// rises only when the data rail and both Ki are 1 (both copies request
// data) and falls only when the rail and both Ki are 0 (both request null).
// A single corrupted request therefore cannot let a new wavefront through.
//
// rst forces the register to NULL. Zero delay.
module ncl_reg2ki
  import ncl_pkg::*;
#(
  parameter int unsigned N = 17
) (
  input  logic         rst,
  input  dr_t  [N-1:0] d,
  input  logic         ki1,
  input  logic         ki2,
  output dr_t  [N-1:0] q
);

  for (genvar i = 0; i < N; i++) begin : g_bit
    ncl_thnn #(.N(3)) u_r1 (.rst(rst), .a({d[i].r1, ki1, ki2}), .z(q[i].r1));
    ncl_thnn #(.N(3)) u_r0 (.rst(rst), .a({d[i].r0, ki1, ki2}), .z(q[i].r0));
  end

endmodule
