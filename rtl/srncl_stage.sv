// srncl_stage: the duplicated registration of one SR-NCL pipeline stage.
//
// Holds, for N dual-rail signals: the original register Reg(a) and the
// duplicate register Reg(b), each with two Ki inputs; two TH22 merge layers,
// one driving copy (a) and one driving copy (b), each fed by both registers;
// and two completion detectors CD(a) and CD(b) at the outputs of the TH22
// layers. CD(a) and CD(b) produce this stage's Ko(a) and Ko(b), which go to
// the previous stage's registers and ISC units.
//
// Interface: d_a/d_b are the data from the previous stage's logic copies;
// ki_a/ki_b are the Ko signals of the next stage's two completion
// detectors; z_a/z_b are the TH22 layer outputs that feed this stage's logic
// copies; ko_a/ko_b are 1 for rfd and 0 for rfn. All of this follows the
// paper's architecture figure; rst (NULL in every register, rfd out of both
// detectors) is this design's choice.
module srncl_stage
  import ncl_pkg::*;
#(
  parameter int unsigned N = 17
) (
  input  logic         rst,
  input  dr_t  [N-1:0] d_a,
  input  dr_t  [N-1:0] d_b,
  input  logic         ki_a,
  input  logic         ki_b,
  output dr_t  [N-1:0] z_a,
  output dr_t  [N-1:0] z_b,
  output logic         ko_a,
  output logic         ko_b
);

  dr_t [N-1:0] q_a, q_b;

  ncl_reg2ki #(.N(N)) u_reg_a (.rst(rst), .d(d_a), .ki1(ki_a), .ki2(ki_b), .q(q_a));
  ncl_reg2ki #(.N(N)) u_reg_b (.rst(rst), .d(d_b), .ki1(ki_a), .ki2(ki_b), .q(q_b));

  ncl_th22_layer #(.N(N)) u_th22_a (.rst(rst), .in_a(q_a), .in_b(q_b), .z(z_a));
  ncl_th22_layer #(.N(N)) u_th22_b (.rst(rst), .in_a(q_a), .in_b(q_b), .z(z_b));

  ncl_cd #(.N(N)) u_cd_a (.rst(rst), .d(z_a), .ko(ko_a));
  ncl_cd #(.N(N)) u_cd_b (.rst(rst), .d(z_b), .ko(ko_b));

endmodule
