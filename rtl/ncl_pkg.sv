// ncl_pkg: shared types and constants for the dual-rail Null Convention
// Logic (NCL) datapath.
//
// A dual-rail signal D is carried on two wires, D.r1 (the "true" rail) and
// D.r0 (the "false" rail). {r1,r0} = 00 is NULL (the spacer between two data
// wavefronts), 01 is DATA0 (logic 0), 10 is DATA1 (logic 1) and 11 is the
// illegal state, called DATAX here, that a single-event upset (SEU) can leave
// on a signal. The encoding is the standard NCL one.
//
// The handshake signals Ko/Ki are single wires: 1 = request-for-data (rfd),
// 0 = request-for-null (rfn).
//
// The DIMS truth tables (TT_*) select the Boolean function of the dual-rail
// two-input gate ncl_dims2; bit index {a,b} of the table is the output for
// inputs a and b.
package ncl_pkg;

  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  localparam dr_t DR_NULL  = '{r1: 1'b0, r0: 1'b0};
  localparam dr_t DR_DATA0 = '{r1: 1'b0, r0: 1'b1};
  localparam dr_t DR_DATA1 = '{r1: 1'b1, r0: 1'b0};
  localparam dr_t DR_DATAX = '{r1: 1'b1, r0: 1'b1};

  localparam logic RFD = 1'b1;
  localparam logic RFN = 1'b0;

  localparam logic [3:0] TT_AND = 4'b1000;
  localparam logic [3:0] TT_OR  = 4'b1110;
  localparam logic [3:0] TT_XOR = 4'b0110;

  // Encodes a Boolean value as a DATA token.
  function automatic dr_t dr_enc(input logic v);
    return v ? DR_DATA1 : DR_DATA0;
  endfunction

  // A dual-rail signal carries DATA (legal or not) when either rail is high.
  function automatic logic dr_valid(input dr_t d);
    return d.r1 | d.r0;
  endfunction

endpackage
