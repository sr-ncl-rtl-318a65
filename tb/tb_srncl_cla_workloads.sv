// tb_srncl_cla_workloads: runs the SR-NCL adder in every width and MSU|LSU
// partition of the published evaluation: 8 bits 5|3; 16 bits 11|5 and 10|6;
// 32 bits 24|8, 22|10, 20|12, 19|13 and 18|14.
//
// Each partition gets its own instance of tb_srncl_cla_cfg_run, all running
// in parallel: exact results without faults, and with the LSU carry
// corrupted an error of exactly 2^LW whenever the true carry was 1. The
// largest error seen per partition is printed; the relative size of that
// error (2^LW against 2^NB) is what sets the output quality of each split.
module tb_srncl_cla_workloads;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned K = 8;
  localparam int unsigned NBS [K] = '{8, 16, 16, 32, 32, 32, 32, 32};
  localparam int unsigned LWS [K] = '{3, 5, 6, 8, 10, 12, 13, 14};

  logic            done [K];
  int unsigned     c [K], f [K], hits [K];
  longint unsigned merr [K];
  int unsigned     checks = 0, failures = 0;

  for (genvar k = 0; k < K; k++) begin : g_cfg
    tb_srncl_cla_cfg_run #(.NB(NBS[k]), .LW(LWS[k]), .NOPS(60)) u_run (
      .done(done[k]), .checks(c[k]), .failures(f[k]),
      .n_carry_hits(hits[k]), .max_err(merr[k])
    );
  end

  function automatic logic all_done();
    for (int k = 0; k < K; k++) if (!done[k]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    #5;
    while (!all_done()) #10;
    for (int k = 0; k < K; k++) begin
      $display("%0d-bit %0d|%0d: checks=%0d failures=%0d carry hits=%0d max error=%0d (2^%0d)",
               NBS[k], NBS[k] - LWS[k], LWS[k], c[k], f[k], hits[k], merr[k], LWS[k]);
      checks += c[k];
      failures += f[k];
      checks++;
      if (hits[k] == 0) begin
        failures++;
        $display("FAIL carry corruption never mattered for %0d|%0d", NBS[k] - LWS[k], LWS[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
