// tb_srncl_stage: self-checking testbench of one SR-NCL stage's duplicated
// registration (two registers, two TH22 layers, two completion detectors).
//
// Runs four-phase cycles on a 4-signal stage and checks: DATA reaches both
// TH22 outputs only after both Ki request data; both Ko go rfn once the data
// is complete and rfd once NULL is complete; DATAX on one copy's input is
// corrected; a DATA wavefront present on one copy only never completes.
module tb_srncl_stage;
  import ncl_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N = 4;
  logic        rst, ki_a, ki_b, ko_a, ko_b;
  dr_t [N-1:0] d_a, d_b, z_a, z_b;
  int unsigned checks = 0, failures = 0;

  srncl_stage #(.N(N)) dut (
    .rst(rst), .d_a(d_a), .d_b(d_b), .ki_a(ki_a), .ki_b(ki_b),
    .z_a(z_a), .z_b(z_b), .ko_a(ko_a), .ko_b(ko_b)
  );

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    rst = 1; d_a = '0; d_b = '0; ki_a = RFN; ki_b = RFN;
    #1 rst = 0; #1;
    check("reset: NULL, rfd", z_a == '0 && z_b == '0 && ko_a == RFD && ko_b == RFD);

    for (int n = 0; n < 500; n++) begin
      logic [N-1:0] v;
      dr_t [N-1:0] tok;
      int j;
      v = N'($urandom);
      for (int i = 0; i < N; i++) tok[i] = dr_enc(v[i]);
      d_a = tok; d_b = tok;
      j = int'($urandom_range(N - 1));
      if (n % 3 == 1) d_a[j] = DR_DATAX;                 // upset on copy (a)
      ki_a = RFD; ki_b = RFN; #1;
      check("one rfd: nothing passes", z_a == '0 && z_b == '0 && ko_a == RFD);
      ki_a = RFN; ki_b = RFD; #1;
      check("other rfd: nothing passes", z_a == '0 && z_b == '0);
      ki_a = RFD; #1;
      check("DATA out, copy a", z_a == tok);
      check("DATA out, copy b", z_b == tok);
      check("Ko rfn", ko_a == RFN && ko_b == RFN);
      d_a = '0; d_b = '0;
      ki_a = RFN; #1;
      check("one rfn: DATA held", z_a == tok && z_b == tok);
      ki_b = RFN; #1;
      check("NULL out", z_a == '0 && z_b == '0);
      check("Ko rfd", ko_a == RFD && ko_b == RFD);
    end

    // DATA on copy (a) only: the stage must not complete.
    d_a = {DR_DATA1, DR_DATA0, DR_DATA1, DR_DATA1};
    ki_a = RFD; ki_b = RFD; #1;
    check("one copy only: blocked", z_a == '0 && z_b == '0 && ko_a == RFD && ko_b == RFD);
    d_a = '0; #1;

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
