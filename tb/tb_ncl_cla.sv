// tb_ncl_cla: self-checking testbench of the dual-rail NCL carry
// look-ahead adder, at the two widths of the default SR-NCL partition:
// W=5 (CL_MSU) and W=3 (CL_LSU).
//
// Each operation is a DATA wavefront followed by a NULL wavefront. The sum
// and carry are compared with integer addition done here; the outputs must
// be all DATA after DATA and all NULL after NULL. Input completeness is
// checked too: with one input still NULL the outputs may not be complete,
// and with one input still DATA they may not all have returned to NULL.
module tb_ncl_cla;
  import ncl_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned WM = 5;
  localparam int unsigned WL = 3;

  logic rst;
  dr_t [WM-1:0] am, bm, sm;
  dr_t          cm, com;
  dr_t [WL-1:0] al, bl, sl;
  dr_t          cl, col;
  int unsigned checks = 0, failures = 0;

  ncl_cla #(.W(WM)) u_msu (.rst(rst), .a(am), .b(bm), .cin(cm), .sum(sm), .cout(com));
  ncl_cla #(.W(WL)) u_lsu (.rst(rst), .a(al), .b(bl), .cin(cl), .sum(sl), .cout(col));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic complete(dr_t [WM:0] v, int w);
    for (int i = 0; i <= w; i++) if (!(v[i].r1 ^ v[i].r0)) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic empty(dr_t [WM:0] v, int w);
    for (int i = 0; i <= w; i++) if (v[i].r1 | v[i].r0) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic [WM:0] value(dr_t [WM:0] v);
    logic [WM:0] r;
    for (int i = 0; i <= WM; i++) r[i] = v[i].r1;
    return r;
  endfunction

  initial begin
    rst = 1; am = '0; bm = '0; cm = DR_NULL; al = '0; bl = '0; cl = DR_NULL;
    #1 rst = 0; #1;

    for (int n = 0; n < 600; n++) begin
      logic [WM-1:0] xa, xb;
      logic          xc;
      logic [WM:0]   em;
      logic [WL:0]   el;
      xa = WM'($urandom); xb = WM'($urandom); xc = 1'($urandom);
      if (n == 0) begin xa = '1; xb = '0; xc = 1'b1; end
      em = {1'b0, xa} + {1'b0, xb} + {{WM{1'b0}}, xc};
      el = {1'b0, xa[WL-1:0]} + {1'b0, xb[WL-1:0]} + {{WL{1'b0}}, xc};
      for (int i = 0; i < WM; i++) begin am[i] = dr_enc(xa[i]); bm[i] = dr_enc(xb[i]); end
      for (int i = 0; i < WL; i++) begin al[i] = dr_enc(xa[i]); bl[i] = dr_enc(xb[i]); end
      // Everything but the carry-in: outputs must not be complete.
      #1;
      check("msu incomplete without cin", !complete({com, sm}, WM));
      check("lsu incomplete without cin", !complete({{(WM-WL){DR_NULL}}, col, sl}, WL));
      cm = dr_enc(xc); cl = dr_enc(xc);
      #1;
      check("msu complete", complete({com, sm}, WM));
      check("lsu complete", complete({{(WM-WL){DR_NULL}}, col, sl}, WL));
      check("msu sum", value({com, sm}) == em);
      check("lsu sum", value({{(WM-WL){DR_NULL}}, col, sl})[WL:0] == el);
      // NULL on everything but operand a[0]: outputs must not all be NULL.
      bm = '0; cm = DR_NULL; am[WM-1:1] = '0;
      bl = '0; cl = DR_NULL; al[WL-1:1] = '0;
      #1;
      check("msu not empty while a[0] DATA", !empty({com, sm}, WM));
      check("lsu not empty while a[0] DATA", !empty({{(WM-WL){DR_NULL}}, col, sl}, WL));
      am = '0; al = '0;
      #1;
      check("msu NULL", empty({com, sm}, WM));
      check("lsu NULL", empty({{(WM-WL){DR_NULL}}, col, sl}, WL));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
