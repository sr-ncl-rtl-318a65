// tb_ncl_reg2ki: self-checking testbench of the two-Ki NCL register.
//
// Random rail and Ki patterns are applied to a 4-bit register and every
// output rail is compared with a reference C-element state kept here (rise
// when the rail and both Ki are 1, fall when all three are 0, else hold).
// Directed checks then show that one rfd alone does not let DATA through
// and one rfn alone does not let NULL through.
module tb_ncl_reg2ki;
  import ncl_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N = 4;
  logic        rst, ki1, ki2;
  dr_t [N-1:0] d, q;
  logic [2*N-1:0] ref_q;
  int unsigned checks = 0, failures = 0;

  ncl_reg2ki #(.N(N)) dut (.rst(rst), .d(d), .ki1(ki1), .ki2(ki2), .q(q));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    rst = 1; d = '0; ki1 = 0; ki2 = 0; ref_q = '0;
    #1 rst = 0; #1;
    check("reset NULL", q == '0);

    for (int n = 0; n < 2000; n++) begin
      logic [2*N-1:0] rails;
      rails = (2*N)'($urandom);
      d = rails;
      ki1 = 1'($urandom); ki2 = 1'($urandom);
      for (int i = 0; i < 2*N; i++) begin
        if (rails[i] & ki1 & ki2)          ref_q[i] = 1'b1;
        else if (!(rails[i] | ki1 | ki2))  ref_q[i] = 1'b0;
      end
      #1;
      check("random", q == ref_q);
    end

    // Directed: start from NULL.
    d = '0; ki1 = 0; ki2 = 0; #1;
    d = {DR_DATA1, DR_DATA0, DR_DATA1, DR_DATA0};
    ki1 = RFD; ki2 = RFN; #1;
    check("one rfd blocks DATA", q == '0);
    ki1 = RFN; ki2 = RFD; #1;
    check("other rfd blocks DATA", q == '0);
    ki1 = RFD; ki2 = RFD; #1;
    check("both rfd pass DATA", q == d);
    d = '0; ki1 = RFN; #1;
    check("one rfn keeps DATA", q == {DR_DATA1, DR_DATA0, DR_DATA1, DR_DATA0});
    ki1 = RFD; ki2 = RFN; #1;
    check("other rfn keeps DATA", q == {DR_DATA1, DR_DATA0, DR_DATA1, DR_DATA0});
    ki1 = RFN; #1;
    check("both rfn pass NULL", q == '0);

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
