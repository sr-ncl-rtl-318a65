// tb_srncl_cla_cfg_run: test driver for one partition of the SR-NCL adder,
// used by tb_srncl_cla_workloads to run the adder widths and MSU|LSU splits
// of the published evaluation.
//
// It instantiates srncl_cla with the given NB (adder width) and LW (LSU
// width), plays the previous and next pipeline stages with the four-phase
// handshake, and runs NOPS operations with random operands. Every second
// operation has the LSU carry Q corrupted to DATAX while it is computed (the
// error model of the image-processing experiment): the ISC units turn it
// into DATA0, so the result must be exact when the true carry is 0 and
// exactly 2^LW too small when it is 1. The other operations must be exact.
// When finished it raises done and reports its counts on its outputs.
module tb_srncl_cla_cfg_run
  import ncl_pkg::*;
#(
  parameter int unsigned NB   = 8,
  parameter int unsigned LW   = 3,
  parameter int unsigned NOPS = 40
) (
  output logic        done,
  output int unsigned checks,
  output int unsigned failures,
  output int unsigned n_carry_hits,
  output longint unsigned max_err
);
  timeunit 1ns; timeprecision 1ps;

  logic          rst;
  dr_t  [NB-1:0] a_a, b_a, a_b, b_b;
  dr_t           cin_a, cin_b;
  logic          ko_a, ko_b, ki_a, ki_b;
  dr_t  [NB:0]   s_a, s_b;

  srncl_cla #(.NB(NB), .LW(LW)) dut (
    .rst(rst), .a_a(a_a), .b_a(b_a), .cin_a(cin_a),
    .a_b(a_b), .b_b(b_b), .cin_b(cin_b),
    .ko_a(ko_a), .ko_b(ko_b), .s_a(s_a), .s_b(s_b), .ki_a(ki_a), .ki_b(ki_b)
  );

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0d|%0d %s at %0t", NB - LW, LW, what, $time);
    end
  endtask

  function automatic logic all_data(dr_t [NB:0] v);
    for (int i = 0; i <= NB; i++) if (!(v[i].r1 ^ v[i].r0)) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic all_null(dr_t [NB:0] v);
    for (int i = 0; i <= NB; i++) if (v[i].r1 | v[i].r0) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic [NB:0] decode(dr_t [NB:0] v);
    logic [NB:0] r;
    for (int i = 0; i <= NB; i++) r[i] = v[i].r1;
    return r;
  endfunction

  function automatic logic [NB-1:0] rand_word();
    logic [NB-1:0] r;
    for (int i = 0; i < NB; i++) r[i] = 1'($urandom);
    return r;
  endfunction

  initial begin
    done = 1'b0; checks = 0; failures = 0; n_carry_hits = 0; max_err = 0;
    rst = 1'b1; ki_a = RFN; ki_b = RFN;
    a_a = '0; b_a = '0; cin_a = DR_NULL; a_b = '0; b_b = '0; cin_b = DR_NULL;
    #2 rst = 1'b0;
    #1;
    for (int n = 0; n < int'(NOPS); n++) begin
      logic [NB-1:0] a, b;
      logic          c, corrupt, carry;
      logic [NB:0]   exp_s, got;
      logic [LW:0]   low;
      int            t;
      a = rand_word(); b = rand_word(); c = 1'($urandom);
      corrupt = n[0];
      exp_s = {1'b0, a} + {1'b0, b} + {{NB{1'b0}}, c};
      low   = {1'b0, a[LW-1:0]} + {1'b0, b[LW-1:0]} + {{LW{1'b0}}, c};
      carry = low[LW];

      for (t = 0; t < 50 && !(ko_a && ko_b); t++) #1;
      check("Ko rfd", ko_a && ko_b);
      if (corrupt) force dut.lsu_q = DR_DATAX;
      for (int i = 0; i < NB; i++) begin
        a_a[i] = dr_enc(a[i]); b_a[i] = dr_enc(b[i]);
      end
      cin_a = dr_enc(c);
      a_b = a_a; b_b = b_a; cin_b = cin_a;
      #1;
      ki_a = RFD; ki_b = RFD;
      for (t = 0; t < 50 && !(all_data(s_a) && all_data(s_b)); t++) #1;
      check("DATA out", all_data(s_a) && all_data(s_b));
      got = decode(s_a);
      check("copies agree", decode(s_b) == got);
      if (corrupt) begin
        release dut.lsu_q;
        if (carry) begin
          n_carry_hits++;
          check("lost carry costs 2^LW", exp_s - got == (NB + 1)'(1) << LW);
          if (longint'(exp_s - got) > max_err) max_err = longint'(exp_s - got);
        end else begin
          check("no carry, exact", got == exp_s);
        end
      end else begin
        check("exact", got == exp_s);
      end

      for (t = 0; t < 50 && (ko_a || ko_b); t++) #1;
      check("Ko rfn", !ko_a && !ko_b);
      a_a = '0; b_a = '0; cin_a = DR_NULL; a_b = '0; b_b = '0; cin_b = DR_NULL;
      ki_a = RFN; ki_b = RFN;
      for (t = 0; t < 50 && !(all_null(s_a) && all_null(s_b)); t++) #1;
      check("NULL out", all_null(s_a) && all_null(s_b));
    end
    done = 1'b1;
  end
endmodule
