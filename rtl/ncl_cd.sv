// ncl_cd: NCL completion detection unit.
//
// Each dual-rail input is DATA when either rail is high. The unit's Ko
// output is request-for-null (rfn, 0) once all N inputs are DATA and
// request-for-data (rfd, 1) once all are NULL; while some are DATA and some
// NULL it holds its previous value. In SR-NCL the inputs are the outputs of
// the stage's TH22 layer, and each copy of a stage has its own unit.
//
// The N-input hysteresis is a single THnn gate over the per-signal DATA
// flags followed by an inverter; a transistor-level design would build the
// same function as a tree of TH44 gates. rst sets Ko to rfd. Zero delay.
module ncl_cd
  import ncl_pkg::*;
#(
  parameter int unsigned N = 17
) (
  input  logic         rst,
  input  dr_t  [N-1:0] d,
  output logic         ko
);

  logic [N-1:0] valid;
  logic         done;

  for (genvar i = 0; i < N; i++) begin : g_or
    assign valid[i] = dr_valid(d[i]);
  end

  ncl_thnn #(.N(N)) u_done (.rst(rst), .a(valid), .z(done));

  assign ko = ~done;

endmodule
