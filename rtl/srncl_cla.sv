// srncl_cla: SR-NCL (selective-redundancy NCL) carry look-ahead adder
// stage.
//
// An NB-bit dual-rail NCL adder between an input stage (stage i) and an
// output stage (stage i+1), protected against single-event upsets by
// duplicating only part of it:
//   * both stages' registration is duplicated (srncl_stage: Reg(a)/(b) with
//     two Ki each, TH22 merge layers, CD(a)/(b));
//   * the adder is split into CL_MSU, the NB-LW most significant bits, and
//     CL_LSU, the LW least significant bits; CL_MSU is duplicated (one copy
//     per circuit copy), CL_LSU is built once and fed from copy (a);
//   * the LSU's sum bits and its carry Q pass through two ISC units, one per
//     copy, on the way to the output registers and to the MSU copies, so
//     that an illegal value produced in the LSU is turned into legal data.
// Faults in the MSU, the ISCs, the registers, the TH22 layers or the
// completion detectors are masked; faults in the LSU can leave a wrong but
// legal value in the low bits and in the carry into the MSU.
//
// Interface (all dual-rail except rst and the Ko/Ki wires):
//   a_*/b_*/cin_* : operands from the previous stage, copy (a) and copy (b)
//   ko_a/ko_b     : stage i completion, to the previous stage (1 = rfd)
//   s_a/s_b       : stage i+1 TH22 outputs, copy (a)/(b); s[NB] is the
//                   carry-out
//   ki_a/ki_b     : Ko of the next stage's two completion detectors
// The ISC units and the input registers take Ki from the output stage's
// CD(a) and CD(b). Timing is purely self-timed: one operation is a DATA
// wavefront followed by a NULL wavefront under the four-phase handshake.
//
// The partitioning, the duplication and the ISC placement follow the paper;
// the carry-in operand, the bit ordering of the stage registers and the
// reset are this design's choices. The handshake loops (Ko feeding back to
// registers) are asynchronous by nature; every state-holding gate appears as
// a latch in synthesis.
module srncl_cla
  import ncl_pkg::*;
#(
  parameter int unsigned NB = 8,   // adder width
  parameter int unsigned LW = 3    // width of the unprotected LSU
) (
  input  logic          rst,
  input  dr_t  [NB-1:0] a_a,
  input  dr_t  [NB-1:0] b_a,
  input  dr_t           cin_a,
  input  dr_t  [NB-1:0] a_b,
  input  dr_t  [NB-1:0] b_b,
  input  dr_t           cin_b,
  output logic          ko_a,
  output logic          ko_b,
  output dr_t  [NB:0]   s_a,
  output dr_t  [NB:0]   s_b,
  input  logic          ki_a,
  input  logic          ki_b
);

  localparam int unsigned NIN = 2 * NB + 1;
  localparam int unsigned MW  = NB - LW;

  if (LW < 1 || LW >= NB) begin : g_bad_partition
    $error("srncl_cla: LW must be between 1 and NB-1");
  end

  // Stage i: operands {cin, b, a}.
  dr_t [NIN-1:0] in_a, in_b, x_a, x_b;
  logic          ko1_a, ko1_b;   // Ko of stage i+1, copies (a) and (b)

  assign in_a = {cin_a, b_a, a_a};
  assign in_b = {cin_b, b_b, a_b};

  srncl_stage #(.N(NIN)) u_st_in (
    .rst(rst), .d_a(in_a), .d_b(in_b), .ki_a(ko1_a), .ki_b(ko1_b),
    .z_a(x_a), .z_b(x_b), .ko_a(ko_a), .ko_b(ko_b)
  );

  // CL_LSU: single copy, fed from copy (a).
  dr_t [LW-1:0] lsu_s;
  dr_t          lsu_q;

  ncl_cla #(.W(LW)) u_lsu (
    .rst(rst), .a(x_a[LW-1:0]), .b(x_a[NB+LW-1:NB]), .cin(x_a[2*NB]),
    .sum(lsu_s), .cout(lsu_q)
  );

  // ISC(a) and ISC(b): {Q, LSU sum}.
  dr_t [LW:0] isc_a, isc_b;

  ncl_isc #(.N(LW+1)) u_isc_a (.rst(rst), .d({lsu_q, lsu_s}), .ki1(ko1_a), .ki2(ko1_b), .q(isc_a));
  ncl_isc #(.N(LW+1)) u_isc_b (.rst(rst), .d({lsu_q, lsu_s}), .ki1(ko1_a), .ki2(ko1_b), .q(isc_b));

  // CL_MSU(a) and CL_MSU(b), carry-in Q from their own ISC.
  dr_t [MW-1:0] msu_s_a, msu_s_b;
  dr_t          msu_c_a, msu_c_b;

  ncl_cla #(.W(MW)) u_msu_a (
    .rst(rst), .a(x_a[NB-1:LW]), .b(x_a[2*NB-1:NB+LW]), .cin(isc_a[LW]),
    .sum(msu_s_a), .cout(msu_c_a)
  );
  ncl_cla #(.W(MW)) u_msu_b (
    .rst(rst), .a(x_b[NB-1:LW]), .b(x_b[2*NB-1:NB+LW]), .cin(isc_b[LW]),
    .sum(msu_s_b), .cout(msu_c_b)
  );

  // Stage i+1: {carry-out, MSU sum, LSU sum}.
  srncl_stage #(.N(NB+1)) u_st_out (
    .rst(rst),
    .d_a({msu_c_a, msu_s_a, isc_a[LW-1:0]}),
    .d_b({msu_c_b, msu_s_b, isc_b[LW-1:0]}),
    .ki_a(ki_a), .ki_b(ki_b),
    .z_a(s_a), .z_b(s_b), .ko_a(ko1_a), .ko_b(ko1_b)
  );

endmodule
