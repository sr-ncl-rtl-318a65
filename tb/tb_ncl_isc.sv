// tb_ncl_isc: self-checking testbench of the illegal state correction unit.
//
// Directed sequences on a 3-signal ISC: legal DATA passes while rfd; the
// output returns to NULL when the input is NULL and rfn; DATA arriving
// while rfn is held back; DATAX becomes DATA0, also when its true rail
// arrives first; a single rfd is enough to pass data, a single rfn is not
// enough to clear it. A random phase then checks that the output is never
// DATAX and that legal DATA input passes unchanged.
module tb_ncl_isc;
  import ncl_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N = 3;
  logic        rst, ki1, ki2;
  dr_t [N-1:0] d, q;
  int unsigned checks = 0, failures = 0;

  ncl_isc #(.N(N)) dut (.rst(rst), .d(d), .ki1(ki1), .ki2(ki2), .q(q));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t q=%b", what, $time, q); end
  endtask

  initial begin
    rst = 1; d = '0; ki1 = RFD; ki2 = RFD;
    #1 rst = 0; #1;
    check("reset NULL", q == '0);

    d = {DR_DATA1, DR_DATA0, DR_DATA1}; #1;
    check("DATA passes on rfd", q == {DR_DATA1, DR_DATA0, DR_DATA1});
    ki1 = RFN; ki2 = RFN; #1;
    check("DATA held while input DATA", q == {DR_DATA1, DR_DATA0, DR_DATA1});
    d = '0; #1;
    check("NULL on rfn", q == '0);
    d = {DR_DATA0, DR_DATA1, DR_DATA1}; #1;
    check("DATA blocked on rfn", q == '0);
    ki2 = RFD; #1;
    check("one rfd passes DATA", q == {DR_DATA0, DR_DATA1, DR_DATA1});
    d = '0; ki2 = RFN; ki1 = RFD; #1;
    check("one rfd holds DATA", q == {DR_DATA0, DR_DATA1, DR_DATA1});
    ki1 = RFN; #1;
    check("both rfn clear", q == '0);

    ki1 = RFD; ki2 = RFD;
    d = {DR_DATAX, DR_DATA1, DR_DATAX}; #1;
    check("DATAX -> DATA0", q == {DR_DATA0, DR_DATA1, DR_DATA0});
    d = '0; ki1 = RFN; ki2 = RFN; #1;
    check("clear after DATAX", q == '0);
    ki1 = RFD; ki2 = RFD;
    d[1] = DR_DATA1; #1;
    check("true rail first", q[1] == DR_DATA1);
    d[1] = DR_DATAX; #1;
    check("late false rail -> DATA0", q[1] == DR_DATA0);
    d = '0; ki1 = RFN; ki2 = RFN; #1;
    check("clear again", q == '0);

    for (int n = 0; n < 1000; n++) begin
      logic illegal;
      d = (2*N)'($urandom);
      ki1 = RFD; ki2 = 1'($urandom);
      #1;
      illegal = 1'b0;
      for (int i = 0; i < N; i++) if (q[i] == DR_DATAX) illegal = 1'b1;
      check("never DATAX", !illegal);
      for (int i = 0; i < N; i++)
        if (d[i] == DR_DATA0 || d[i] == DR_DATA1) check("legal passes", q[i] == d[i]);
        else if (d[i] == DR_DATAX)                check("DATAX forced", q[i] == DR_DATA0);
      d = '0; ki1 = RFN; ki2 = RFN; #1;
      check("random clear", q == '0);
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
