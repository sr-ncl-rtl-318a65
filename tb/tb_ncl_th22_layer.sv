// tb_ncl_th22_layer: self-checking testbench of the TH22 merge layer.
//
// Random rail patterns on the two copies are compared against a reference
// C-element per rail kept here. Directed checks follow the paper's fault
// cases: DATAX on copy (a) with correct DATA on copy (b) gives the correct
// DATA; spurious DATA on one copy during NULL is blocked.
module tb_ncl_th22_layer;
  import ncl_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N = 5;
  logic        rst;
  dr_t [N-1:0] in_a, in_b, z;
  logic [2*N-1:0] ref_z;
  int unsigned checks = 0, failures = 0;

  ncl_th22_layer #(.N(N)) dut (.rst(rst), .in_a(in_a), .in_b(in_b), .z(z));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    rst = 1; in_a = '0; in_b = '0; ref_z = '0;
    #1 rst = 0; #1;
    check("reset NULL", z == '0);

    for (int n = 0; n < 2000; n++) begin
      logic [2*N-1:0] ra, rb;
      ra = (2*N)'($urandom); rb = (2*N)'($urandom);
      in_a = ra; in_b = rb;
      for (int i = 0; i < 2*N; i++) begin
        if (ra[i] & rb[i])         ref_z[i] = 1'b1;
        else if (!(ra[i] | rb[i])) ref_z[i] = 1'b0;
      end
      #1;
      check("random", z == ref_z);
    end

    in_a = '0; in_b = '0; #1;
    check("back to NULL", z == '0);
    // Case I: DATAX on copy (a), correct DATA on copy (b).
    in_b = {DR_DATA1, DR_DATA0, DR_DATA1, DR_DATA1, DR_DATA0};
    in_a = in_b;
    in_a[1] = DR_DATAX;
    #1;
    check("DATAX corrected", z == in_b);
    in_a = '0; in_b = '0; #1;
    // Spurious DATA on one copy during NULL.
    in_a[3] = DR_DATA1; #1;
    check("spurious DATA blocked", z == '0);
    in_a = '0; #1;
    check("NULL again", z == '0);

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
