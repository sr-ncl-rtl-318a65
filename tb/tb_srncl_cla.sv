// tb_srncl_cla: end-to-end self-checking testbench of the SR-NCL adder
// (srncl_cla at its default parameters, 8 bits split 5|3).
//
// The testbench plays both neighbours of the adder: the previous stage,
// which offers a DATA or NULL wavefront on both copies of the operands once
// the adder's two Ko signals request it, and the next stage, which drives
// the two Ki inputs. Each operation is the full four-phase cycle: DATA in,
// DATA out, Ko to rfn, NULL in, NULL out, Ko back to rfd. Results are
// compared with A + B + Cin computed here.
//
// Single-event upsets are injected with force/release on internal nets,
// one per operation, cycling through the cases the architecture is meant to
// handle:
//   case I     : DATAX on an output of CL_MSU(a) while DATA is in flight
//                -> corrected by the TH22 gates, exact result;
//   case II    : DATAX on an LSU sum bit or on the LSU carry Q
//                -> turned into DATA0 by both ISC units, legal but
//                   possibly wrong result (predicted here);
//   case III   : DATAX on the output of ISC(a) -> exact result;
//   NULL-phase : spurious DATA on CL_MSU(a), CL_LSU or ISC(a) while the
//                adder is returning to NULL -> outputs unchanged, next
//                operation exact;
//   control    : premature rfn from the output stage's CD(a) while the
//                adder is still computing, and premature rfd while it is
//                still returning to NULL -> the input registers must not
//                move, no deadlock, exact result.
// A slow gate is emulated by holding an internal net at its old value for a
// few time units, which is how a partially computed wavefront is produced.
// Each mechanism is counted and must occur at least once. A final streaming
// phase runs the previous and next stage as concurrent processes with random
// delays and checks the results in order, counting how often the previous
// stage had to wait for the adder (back-pressure).
module tb_srncl_cla;
  import ncl_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned NB = 8;
  localparam int unsigned LW = 3;
  localparam int unsigned MW = NB - LW;
  localparam int unsigned LV = $clog2(LW + 1);
  localparam int unsigned NOPS = 400;

  logic          rst;
  dr_t  [NB-1:0] a_a, b_a, a_b, b_b;
  dr_t           cin_a, cin_b;
  logic          ko_a, ko_b, ki_a, ki_b;
  dr_t  [NB:0]   s_a, s_b;

  srncl_cla dut (
    .rst(rst), .a_a(a_a), .b_a(b_a), .cin_a(cin_a),
    .a_b(a_b), .b_b(b_b), .cin_b(cin_b),
    .ko_a(ko_a), .ko_b(ko_b), .s_a(s_a), .s_b(s_b), .ki_a(ki_a), .ki_b(ki_b)
  );

  int unsigned checks = 0, failures = 0;

  typedef enum int {
    M_NORMAL, M_CASE1, M_CASE2_SUM, M_CASE2_Q, M_CASE3,
    M_NULL_MSU, M_NULL_LSU, M_NULL_ISC, M_PREM_RFN, M_PREM_RFD, M_COUNT
  } mech_e;
  int unsigned seen [M_COUNT];

  // ---------------------------------------------------------------- helpers
  function automatic logic [NB:0] expect_sum(logic [NB-1:0] a, logic [NB-1:0] b, logic c);
    return {1'b0, a} + {1'b0, b} + {{NB{1'b0}}, c};
  endfunction

  function automatic logic lsb_carry(logic [NB-1:0] a, logic [NB-1:0] b, logic c);
    logic [LW:0] t;
    t = {1'b0, a[LW-1:0]} + {1'b0, b[LW-1:0]} + {{LW{1'b0}}, c};
    return t[LW];
  endfunction

  function automatic logic has_x(dr_t [NB:0] v);
    for (int i = 0; i <= NB; i++) if (v[i] == DR_DATAX) return 1'b1;
    return 1'b0;
  endfunction

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

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic drive_data(logic [NB-1:0] a, logic [NB-1:0] b, logic c);
    for (int i = 0; i < NB; i++) begin
      a_a[i] = dr_enc(a[i]); b_a[i] = dr_enc(b[i]);
    end
    cin_a = dr_enc(c);
    a_b = a_a; b_b = b_a; cin_b = cin_a;
  endtask

  task automatic drive_null();
    a_a = '0; b_a = '0; cin_a = DR_NULL;
    a_b = '0; b_b = '0; cin_b = DR_NULL;
  endtask

  // Polls a condition for up to 50 time units.
  task automatic wait_ko(logic v, string what);
    int t;
    for (t = 0; t < 50 && !(ko_a == v && ko_b == v); t++) #1;
    check({what, ": Ko"}, ko_a == v && ko_b == v);
  endtask

  task automatic wait_out_data(string what);
    int t;
    for (t = 0; t < 50 && !(all_data(s_a) && all_data(s_b)); t++) #1;
    check({what, ": output DATA"}, all_data(s_a) && all_data(s_b));
  endtask

  task automatic wait_out_null(string what);
    int t;
    for (t = 0; t < 50 && !(all_null(s_a) && all_null(s_b)); t++) #1;
    check({what, ": output NULL"}, all_null(s_a) && all_null(s_b));
  endtask

  function automatic dr_t [NB:0] flip_to_x(dr_t [NB:0] v, int j);
    v[j] = DR_DATAX;
    return v;
  endfunction

  // ---------------------------------------------------------- one operation
  task automatic run_op(mech_e m, logic [NB-1:0] a, logic [NB-1:0] b, logic c);
    logic [NB:0] exp_s;
    int          j;
    dr_t [MW-1:0] msu_v;
    dr_t [LW-1:0] lsu_v;
    dr_t [LW:0]   isc_v;
    dr_t [NB:0]   s_hold;

    exp_s = expect_sum(a, b, c);

    // Previous stage: offer DATA once both Ko request it.
    wait_ko(RFD, "rfd before DATA");
    if (m == M_PREM_RFN) begin
      // Hold the LSU sum outputs at NULL (a slow gate), so the adder has
      // only partly computed when the upset hits the output stage's CD(a).
      force dut.lsu_s = '0;
    end
    if (m == M_CASE2_Q) begin
      // DATAX on the carry Q while the DATA wavefront is computed: both ISC
      // units pass DATA0, so a carry of 1 into the MSU is lost.
      if (lsb_carry(a, b, c)) exp_s = exp_s - (NB + 1)'(1 << LW);
      force dut.lsu_q = DR_DATAX;
    end
    drive_data(a, b, c);
    #1;

    // Upsets during the DATA phase, before the next stage takes the data.
    case (m)
      M_CASE1: begin
        j = int'($urandom_range(MW - 1));
        msu_v = dut.msu_s_a;
        msu_v[j] = DR_DATAX;
        force dut.msu_s_a = msu_v;
      end
      M_CASE2_SUM: begin
        j = int'($urandom_range(LW - 1));
        lsu_v = dut.lsu_s;
        if (lsu_v[j] == DR_DATA1) exp_s[j] = 1'b0;   // forced to DATA0
        lsu_v[j] = DR_DATAX;
        force dut.lsu_s = lsu_v;
      end
      M_CASE3: begin
        j = int'($urandom_range(LW));
        isc_v = dut.isc_a;
        isc_v[j] = DR_DATAX;
        force dut.isc_a = isc_v;
      end
      M_PREM_RFN: begin
        // Partial DATA: both CDs of the output stage still request data.
        check("partial DATA keeps CD(a) rfd", dut.ko1_a == RFD && dut.ko1_b == RFD);
        force dut.ko1_a = RFN;            // premature rfn
        #1;
        // The previous stage now withdraws its data (its Ko went rfn).
        wait_ko(RFN, "prem rfn: input stage took DATA");
        drive_null();
        #3;
        check("prem rfn: input registers keep DATA",
              dut.u_st_in.q_a[0] != DR_NULL && dut.u_st_in.q_b[0] != DR_NULL);
        release dut.lsu_s;                // the slow gate finishes
        #1;
      end
      default: ;
    endcase

    // Next stage: request data.
    ki_a = RFD; ki_b = RFD;
    wait_out_data("DATA out");
    check("sum copy a", decode(s_a) == exp_s);
    check("sum copy b", decode(s_b) == exp_s);
    if (decode(s_a) != exp_s)
      $display("  mech %s a=%0d b=%0d c=%0d got %0d exp %0d", m.name(), a, b, c,
               decode(s_a), exp_s);

    // Confirm that each upset reached the point the architecture covers.
    case (m)
      M_CASE1, M_CASE3:
        check("DATAX latched in Reg_i+1(a) only",
              has_x(dut.u_st_out.q_a) && !has_x(dut.u_st_out.q_b));
      M_CASE2_SUM:
        check("both ISCs give DATA0", dut.isc_a[j] == DR_DATA0 && dut.isc_b[j] == DR_DATA0);
      M_CASE2_Q:
        check("both ISCs give Q=DATA0", dut.isc_a[LW] == DR_DATA0 && dut.isc_b[LW] == DR_DATA0);
      default: ;
    endcase

    case (m)
      M_CASE1:     release dut.msu_s_a;
      M_CASE2_SUM: release dut.lsu_s;
      M_CASE2_Q:   release dut.lsu_q;
      M_CASE3:     release dut.isc_a;
      M_PREM_RFN: begin
        check("prem rfn: CD(b) now rfn too", dut.ko1_b == RFN);
        release dut.ko1_a;
      end
      default: ;
    endcase

    // Hold CL_MSU(b)'s outputs at DATA (a slow NULL wavefront), so the
    // output stage is only partly NULL when CD(a) flips to rfd.
    if (m == M_PREM_RFD) begin
      msu_v = dut.msu_s_b;
      force dut.msu_s_b = msu_v;
    end

    // Previous stage: NULL once the input stage has the DATA.
    if (m != M_PREM_RFN) begin
      wait_ko(RFN, "rfn after DATA");
      drive_null();
    end
    #1;
    s_hold = s_a;

    // Upsets during the NULL phase, while the outputs still hold DATA.
    case (m)
      M_NULL_MSU: begin
        j = int'($urandom_range(MW - 1));
        msu_v = dut.msu_s_a;
        msu_v[j] = ($urandom_range(1) != 0) ? DR_DATA1 : DR_DATA0;
        force dut.msu_s_a = msu_v;
        #2;
        check("null msu: output held", s_a == s_hold && s_b == s_hold);
        release dut.msu_s_a;
      end
      M_NULL_LSU: begin
        j = int'($urandom_range(LW - 1));
        lsu_v = dut.lsu_s;
        lsu_v[j] = ($urandom_range(1) != 0) ? DR_DATA1 : DR_DATA0;
        force dut.lsu_s = lsu_v;
        #2;
        check("null lsu: ISC stays NULL", dut.isc_a == '0 && dut.isc_b == '0);
        check("null lsu: output held", s_a == s_hold && s_b == s_hold);
        release dut.lsu_s;
      end
      M_NULL_ISC: begin
        j = int'($urandom_range(LW));
        isc_v = dut.isc_a;
        isc_v[j] = ($urandom_range(1) != 0) ? DR_DATA1 : DR_DATA0;
        force dut.isc_a = isc_v;
        #2;
        check("null isc: output held", s_a == s_hold && s_b == s_hold);
        release dut.isc_a;
      end
      default: ;
    endcase

    // Next stage: request null.
    ki_a = RFN; ki_b = RFN;

    if (m == M_PREM_RFD) begin
      #2;
      check("prem rfd: output partly DATA", !all_null(s_a) && dut.ko1_b == RFN);
      // The previous stage already offers the next DATA.
      wait_ko(RFD, "prem rfd: input stage NULL");
      drive_data(~a, b, c);
      force dut.ko1_a = RFD;            // premature rfd
      #3;
      check("prem rfd: input registers stay NULL",
            dut.u_st_in.q_a == '0 && dut.u_st_in.q_b == '0);
      release dut.msu_s_b;              // the slow gate finishes
      wait_out_null("prem rfd NULL out");
      release dut.ko1_a;
      // Let the pending DATA through and finish that operation too.
      exp_s = expect_sum(~a, b, c);
      ki_a = RFD; ki_b = RFD;
      wait_out_data("prem rfd: next DATA out");
      check("prem rfd: next sum", decode(s_a) == exp_s && decode(s_b) == exp_s);
      wait_ko(RFN, "prem rfd: rfn after DATA");
      drive_null();
      ki_a = RFN; ki_b = RFN;
    end

    wait_out_null("NULL out");
    seen[m]++;
  endtask

  // -------------------------------------------------------- streaming mode
  localparam int unsigned NSTREAM = 200;
  int unsigned n_stall = 0;
  logic [NB:0] exp_q [$];

  task automatic stream(int unsigned n_tok);
    fork
      begin : producer
        for (int unsigned n = 0; n < n_tok; n++) begin
          logic [NB-1:0] a, b;
          logic          c;
          int            t;
          a = NB'($urandom); b = NB'($urandom); c = 1'($urandom);
          #($urandom_range(2));
          if (!(ko_a && ko_b)) n_stall++;
          for (t = 0; t < 100 && !(ko_a && ko_b); t++) #1;
          exp_q.push_back(expect_sum(a, b, c));
          drive_data(a, b, c);
          for (t = 0; t < 100 && (ko_a || ko_b); t++) #1;
          #($urandom_range(2));
          drive_null();
        end
      end
      begin : consumer
        for (int unsigned n = 0; n < n_tok; n++) begin
          logic [NB:0] e;
          #($urandom_range(5));
          ki_a = RFD; ki_b = RFD;
          wait_out_data("stream DATA out");
          e = exp_q.pop_front();
          check("stream sum", decode(s_a) == e && decode(s_b) == e);
          #($urandom_range(5));
          ki_a = RFN; ki_b = RFN;
          wait_out_null("stream NULL out");
        end
      end
    join
  endtask

  // ------------------------------------------------------------------- main
  initial begin
    rst = 1'b1;
    ki_a = RFN; ki_b = RFN;
    drive_null();
    #2 rst = 1'b0;
    #1;
    check("reset: outputs NULL", all_null(s_a) && all_null(s_b));
    check("reset: Ko rfd", ko_a == RFD && ko_b == RFD);

    // Corner operands first, then random ones with the mechanisms in turn.
    run_op(M_NORMAL, '0, '0, 1'b0);
    run_op(M_NORMAL, '1, '1, 1'b1);
    run_op(M_NORMAL, '1, '0, 1'b1);
    for (int n = 0; n < NOPS; n++) begin
      mech_e m;
      m = mech_e'(n % int'(M_COUNT));
      run_op(m, NB'($urandom), NB'($urandom), 1'($urandom));
    end

    // Streaming phase: producer and consumer run concurrently with random
    // delays, so the adder sees back-pressure from a slow next stage and
    // idle time from a slow previous stage.
    stream(NSTREAM);
    $display("streaming: %0d tokens, %0d producer stalls", NSTREAM, n_stall);
    check("back-pressure stall occurred", n_stall > 0);

    for (int k = 0; k < int'(M_COUNT); k++) begin
      $display("mechanism %s: %0d", mech_e'(k), seen[k]);
      check("mechanism exercised", seen[k] > 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
