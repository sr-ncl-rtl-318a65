// tb_ncl_cd: self-checking testbench of the completion detector.
//
// Drives random mixtures of DATA0, DATA1, DATAX and NULL on 6 dual-rail
// inputs and compares Ko with a reference kept here: rfn once every input is
// DATA, rfd once every input is NULL, unchanged otherwise. Complete
// wavefronts are forced every few steps so that both transitions happen.
module tb_ncl_cd;
  import ncl_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N = 6;
  logic        rst, ko, ref_ko;
  dr_t [N-1:0] d;
  int unsigned checks = 0, failures = 0, n_rfn = 0, n_rfd = 0;

  ncl_cd #(.N(N)) dut (.rst(rst), .d(d), .ko(ko));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    rst = 1; d = '0; ref_ko = RFD;
    #1 rst = 0; #1;
    check("reset rfd", ko == RFD);

    for (int n = 0; n < 3000; n++) begin
      logic all_d, all_n;
      case (n % 8)
        3: for (int i = 0; i < N; i++) d[i] = dr_enc(1'($urandom));
        7: d = '0;
        default: d = (2*N)'($urandom);
      endcase
      all_d = 1'b1; all_n = 1'b1;
      for (int i = 0; i < N; i++) begin
        if (d[i] == DR_NULL) all_d = 1'b0;
        else                 all_n = 1'b0;
      end
      if (all_d) begin ref_ko = RFN; n_rfn++; end
      if (all_n) begin ref_ko = RFD; n_rfd++; end
      #1;
      check("ko", ko == ref_ko);
    end
    check("rfn seen", n_rfn > 0);
    check("rfd seen", n_rfd > 0);

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
