// ncl_cla: dual-rail NCL carry look-ahead adder of width W.
//
// In SR-NCL the adder of a pipeline stage is split in two instances of this
// module: CL_LSU adds the L least significant bits and produces the carry Q,
// and CL_MSU adds the remaining most significant bits with Q as its carry-in
// (the MSU is instantiated twice, once per copy).
//
// Structure: per bit, a dual-rail generate g = a AND b and propagate
// p = a XOR b; a Kogge-Stone parallel-prefix network combines (g,p) pairs
// with (G,P) o (G',P') = (G OR (P AND G'), P AND P'), the carry-in being
// prefix element 0; sum bit i = p_i XOR c_i and the carry-out is the
// group generate of all bits. Every gate is a DIMS gate (ncl_dims2) made of
// TH22 gates, so the adder is input complete and behaves as a quasi-delay-
// insensitive NCL combinational unit: all outputs become DATA once all inputs
// are DATA, and NULL once all inputs are NULL.
//
// The paper names the adder a carry look-ahead adder but does not give its
// gate-level structure; the prefix network and the DIMS gate style are this
// design's choice.
module ncl_cla
  import ncl_pkg::*;
#(
  parameter int unsigned W = 5
) (
  input  logic         rst,
  input  dr_t  [W-1:0] a,
  input  dr_t  [W-1:0] b,
  input  dr_t          cin,
  output dr_t  [W-1:0] sum,
  output dr_t          cout
);

  localparam int unsigned E  = W + 1;          // prefix elements: cin + W bits
  localparam int unsigned LV = $clog2(E);      // prefix levels

  dr_t [W-1:0] p_bit, g_bit;
  dr_t [E-1:0] gg [LV+1];
  dr_t [E-1:0] pp [LV+1];

  for (genvar i = 0; i < W; i++) begin : g_pg
    ncl_dims2 #(.TT(TT_XOR)) u_p (.rst(rst), .a(a[i]), .b(b[i]), .z(p_bit[i]));
    ncl_dims2 #(.TT(TT_AND)) u_g (.rst(rst), .a(a[i]), .b(b[i]), .z(g_bit[i]));
  end

  // Element 0 is the carry-in; it has a generate only. Its propagate slot
  // is never read by the prefix network and is tied to NULL.
  assign gg[0][0] = cin;
  assign pp[0][0] = DR_NULL;
  for (genvar i = 1; i < E; i++) begin : g_init
    assign gg[0][i] = g_bit[i-1];
    assign pp[0][i] = p_bit[i-1];
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    localparam int unsigned D = 1 << l;
    for (genvar i = 0; i < E; i++) begin : g_node
      if (i >= D) begin : g_comb
        dr_t pg;
        ncl_dims2 #(.TT(TT_AND)) u_pg (.rst(rst), .a(pp[l][i]), .b(gg[l][i-D]), .z(pg));
        ncl_dims2 #(.TT(TT_OR))  u_g  (.rst(rst), .a(gg[l][i]), .b(pg),         .z(gg[l+1][i]));
        // The group propagate is only needed while the span does not yet
        // reach the carry-in element.
        if (i >= 2 * D) begin : g_p
          ncl_dims2 #(.TT(TT_AND)) u_p (.rst(rst), .a(pp[l][i]), .b(pp[l][i-D]), .z(pp[l+1][i]));
        end else begin : g_nop
          assign pp[l+1][i] = DR_NULL;
        end
      end else begin : g_pass
        assign gg[l+1][i] = gg[l][i];
        assign pp[l+1][i] = DR_NULL;
      end
    end
  end

  // gg[LV][i] is the carry into bit i (element i spans bits i-1..0 and cin).
  for (genvar i = 0; i < W; i++) begin : g_sum
    ncl_dims2 #(.TT(TT_XOR)) u_s (.rst(rst), .a(p_bit[i]), .b(gg[LV][i]), .z(sum[i]));
  end
  assign cout = gg[LV][W];

endmodule
