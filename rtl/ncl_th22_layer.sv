// ncl_th22_layer: the SR-NCL layer of TH22 gates that merges the original
// and the duplicate copy of a register's outputs.
//
// Each rail of each of the N dual-rail signals goes through a TH22 gate
// whose inputs are that rail from copy (a) and from copy (b). A value
// therefore reaches the output only when both copies carry it: a DATAX on
// one copy is corrected by the other (only the rail both copies agree on
// rises), and a spurious DATA on one copy during NULL is blocked.
//
// Every stage holds two such layers, one feeding each copy, both with the
// same two inputs. rst forces NULL. Zero delay.
module ncl_th22_layer
  import ncl_pkg::*;
#(
  parameter int unsigned N = 17
) (
  input  logic         rst,
  input  dr_t  [N-1:0] in_a,
  input  dr_t  [N-1:0] in_b,
  output dr_t  [N-1:0] z
);

  for (genvar i = 0; i < N; i++) begin : g_bit
    ncl_thnn #(.N(2)) u_r1 (.rst(rst), .a({in_a[i].r1, in_b[i].r1}), .z(z[i].r1));
    ncl_thnn #(.N(2)) u_r0 (.rst(rst), .a({in_a[i].r0, in_b[i].r0}), .z(z[i].r0));
  end

endmodule
