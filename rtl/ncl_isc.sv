// ncl_isc: SR-NCL illegal state correction (ISC) unit.
//
// Sits at the output of the non-duplicated CL_LSU; one instance feeds each
// copy of the circuit (its N signals are the LSU's sum bits and its carry
// Q). For every dual-rail signal it passes DATA while the following stage
// requests data, returns to NULL while the following stage requests null,
// and turns an illegal DATAX input into DATA0, so that a fault in the
// unprotected LSU leaves legal (if possibly wrong) data behind.
//
// Each rail is a state-holding gate with the two Ki of the following stage
// (from its original and duplicate completion detectors) as control:
//   false rail h0: rises when d.r0 = 1 and either Ki requests data (the
//                  NCL TH23w2 gate with d.r0 weighted 2); falls when d.r0
//                  and both Ki are 0.
//   true rail  h1: rises when d.r1 = 1, d.r0 = 0 and either Ki requests
//                  data; falls when d.r1 and both Ki are 0, or as soon as
//                  d.r0 rises. A DATAX input therefore ends as DATA0 even
//                  if its true rail arrived first.
// Letting either Ki open the unit keeps a single corrupted rfn from the
// following stage's completion detector from blocking data in the LSU path.
// The output is not masked, so an upset inside one ISC copy shows as DATAX
// on that copy and is removed by the following stage's TH22 gates.
//
// rst forces NULL. Zero delay. The data-passing, NULL-returning and
// DATAX-to-DATA0 behaviour follows the paper; the gate-level realisation
// and the use of both Ki are this design's choices.
module ncl_isc
  import ncl_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic         rst,
  input  dr_t  [N-1:0] d,
  input  logic         ki1,
  input  logic         ki2,
  output dr_t  [N-1:0] q
);

  logic req_data, req_null;

  assign req_data = ki1 | ki2;
  assign req_null = ~(ki1 | ki2);

  for (genvar i = 0; i < N; i++) begin : g_bit
    logic h1, h0;

    always_latch begin
      if (rst)                                  h0 = 1'b0;
      else if (d[i].r0 & req_data)              h0 = 1'b1;
      else if (~d[i].r0 & req_null)             h0 = 1'b0;
    end

    always_latch begin
      if (rst)                                  h1 = 1'b0;
      else if (d[i].r0)                         h1 = 1'b0;
      else if (d[i].r1 & req_data)              h1 = 1'b1;
      else if (~d[i].r1 & req_null)             h1 = 1'b0;
    end

    assign q[i] = '{r1: h1, r0: h0};
  end

endmodule
