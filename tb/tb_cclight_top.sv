// tb_cclight_top -- end-to-end test of the CC-Light eQASM processor at its
// default sizes (32768-word instruction memory, 1024-word data memory,
// 32-entry timing queue, 16-entry event queues).
//
// The testbench plays the host and the qubit side.  As host it loads a
// program through the instruction-memory port, configures the control store,
// writes an input word into data memory, raises `run` and, after STOP, reads
// the result word back.  As qubit side it records every codeword with its
// cycle and answers each measurement trigger with a result after a fixed
// readout latency (a behavioural stand-in for the analog readout chain).
//
// The program follows the feedback example of the specification (measure
// qubit 1, FMR, CMP, BR, then X or Y on qubit 0) and adds: parallel single-
// and two-qubit operations in one timing point, fast conditional execution
// (one gated operation executed, one dropped, a gated measurement dropped),
// a data-memory round trip, a burst of 20 operations on one qubit that fills
// its event queue, a burst of 40 QWAITs that fills the timing queue, and a
// deliberately late timing point.  The CZ opcode is configured as a
// two-codeword decomposition (second codewords two cycles after the first).  Checks: codeword values, the spacing in
// cycles between timing points (the QWAIT/PI intervals), branch outcome,
// data results, and that every mechanism happened at least once.
module tb_cclight_top;
  import eqasm_pkg::*;
  import eqasm_asm_pkg::*;

  localparam int MEAS_LAT = 15;         // readout latency of the qubit-side model

  logic clk = 0, rst_n = 0, run = 0;
  logic host_imem_we = 0;
  logic [14:0] host_imem_addr = '0;
  logic [31:0] host_imem_wdata = '0;
  logic host_dmem_en = 0, host_dmem_we = 0;
  logic [9:0] host_dmem_addr = '0;
  logic [31:0] host_dmem_wdata = '0, host_dmem_rdata;
  logic host_uc_we = 0;
  qop_t host_uc_addr = '0;
  ucode_t host_uc_data = '0;
  logic stopped, timing_late, op_conflict, retire;
  logic [16:0] pc;
  logic [6:0] cw_valid, meas_trig;
  cw_t [6:0] cw;
  logic [6:0] meas_res_valid, meas_res;

  cclight_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned cyc = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- qubit side: codeword log and readout model
  typedef struct { int unsigned t; int q; int c; } cw_rec_t;
  cw_rec_t cwlog [$];
  int unsigned meas_due [7][$];
  logic [6:0] meas_value = 7'b0000010;   // qubit 1 reads |1>, the others |0>
  int n_meas = 0;
  always @(posedge clk) begin : monitor
    cyc <= cyc + 1;
    meas_res_valid <= '0;
    meas_res <= '0;
    for (int q = 0; q < 7; q++) if (rst_n) begin
      if (cw_valid[q]) cwlog.push_back('{cyc, q, int'(cw[q])});
      if (meas_trig[q] && $test$plusargs("trace")) $display("meas q%0d at %0d", q, cyc);
      if (meas_trig[q]) begin meas_due[q].push_back(cyc + MEAS_LAT); n_meas++; end
      if (meas_due[q].size() > 0 && meas_due[q][0] == cyc) begin
        void'(meas_due[q].pop_front());
        meas_res_valid[q] <= 1'b1;
        meas_res[q] <= meas_value[q];
      end
    end
  end

  // ---- mechanism counters
  int n_fmr_stall = 0, n_ld_stall = 0, n_evq_stall = 0, n_tq_stall = 0;
  int n_taken = 0, n_cond_exec = 0, n_cond_drop = 0, n_meas_cancel = 0, n_late = 0;
  int n_retired = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.v && dut.u_core.op == OP_FMR && dut.u_core.stall) n_fmr_stall++;
    if (dut.u_core.v && dut.u_core.op == OP_LD && dut.u_core.stall) n_ld_stall++;
    if (dut.u_core.vb && |(dut.u_core.q_sel & dut.u_core.ev_full)) n_evq_stall++;
    if ((dut.u_core.vb || dut.u_core.v) && dut.u_core.tq_full &&
        (dut.u_core.is_bundle || dut.u_core.op == OP_QWAIT)) n_tq_stall++;
    if (dut.u_core.taken) n_taken++;
    for (int q = 0; q < 7; q++) if (dut.u_events.pop[q] && dut.u_events.head[q].cond != XF_ALWAYS) begin
      if (dut.u_events.exec_ok[q]) n_cond_exec++; else n_cond_drop++;
    end
    if (|dut.meas_cancel) n_meas_cancel++;
    if (dut.late) n_late++;
    if (retire) n_retired++;
    if ($test$plusargs("trace") && cyc % 500 == 0) $display("%0d pc=%0d stall=%b tqc=%0d stopped=%b", cyc, pc/4, dut.u_core.stall, dut.u_timing.count, stopped);
  end

  function automatic int unsigned first_cw(int q, int c);
    foreach (cwlog[i]) if (cwlog[i].q == q && cwlog[i].c == c) return cwlog[i].t;
    return 0;
  endfunction
  function automatic int count_cw(int q, int c);
    int n = 0;
    foreach (cwlog[i]) if (cwlog[i].q == q && (c < 0 || cwlog[i].c == c)) n++;
    return n;
  endfunction

  logic [31:0] prog [$];
  task automatic uc(int opc, bit two, bit meas, int cond, int c0, int c1, int d2 = 0, int c20 = 0, int c21 = 0);
    @(negedge clk);
    host_uc_we = 1; host_uc_addr = qop_t'(opc);
    host_uc_data = '{two_qubit: two, is_meas: meas, cond: 2'(cond), cw_src: cw_t'(c0), cw_tgt: cw_t'(c1),
                     dly2: 4'(d2), cw2_src: cw_t'(c20), cw2_tgt: cw_t'(c21)};
    @(negedge clk); host_uc_we = 0;
  endtask

  localparam int X = 9, Y = 10, MEASZ = 6, CMEAS = 7, CX1 = 32, CZ = 128;

  initial begin
    int lbl_loop1, lbl_loop2, lbl_loop3;
    int unsigned t_x, t_cz, t_meas, t_y, t_c1;
    meas_res_valid = '0; meas_res = '0;
    // ----- program
    prog.push_back(a_smis(0, 7'b0000001));          // 0  S0 = {q0}
    prog.push_back(a_smis(1, 7'b0000010));          // 1  S1 = {q1}
    prog.push_back(a_smis(2, 7'b0100101));          // 2  S2 = {q0, q2, q5}
    prog.push_back(a_smis(5, 7'b0100000));          // 3  S5 = {q5}
    prog.push_back(a_smit(0, 16'h0004));            // 4  T0 = {(3,1)}
    prog.push_back(a_ldi(0, 1));                    // 5
    prog.push_back(a_qwait(100));                   // 6  label 1
    prog.push_back(a_bundle(1, X, 2, CZ, 0));       // 7  label 2: X on q0,q2,q5 | CZ (3,1)
    prog.push_back(a_bundle(4, MEASZ, 1, 0, 0));    // 8  label 3: measure q1
    prog.push_back(a_qwait(30));                    // 9  label 4
    prog.push_back(a_nop());                        // 10
    prog.push_back(a_fmr(1, 1));                    // 11 R1 = Q1 (waits)
    prog.push_back(a_cmp(1, 0));                    // 12
    prog.push_back(a_nop());                        // 13
    prog.push_back(a_br(CF_EQ, 3));                 // 14 -> 17 when R1 == 1
    prog.push_back(a_bundle(1, X, 0, 0, 0));        // 15 (not executed)
    prog.push_back(a_br(CF_ALWAYS, 2));             // 16
    prog.push_back(a_bundle(1, Y, 0, 0, 0));        // 17 label 5: Y on q0
    prog.push_back(a_bundle(1, CX1, 1, CX1, 0));    // 18 label 6: gated on "last result 1": q1 runs, q0 dropped
    prog.push_back(a_bundle(1, CMEAS, 0, 0, 0));    // 19 label 7: gated measurement on q0, dropped
    prog.push_back(a_fmr(8, 0));                    // 20 must not hang: R8 = 0
    prog.push_back(a_ldi(2, 64));                   // 21 data area (word 16)
    prog.push_back(a_ld(3, 2, 0));                  // 22 R3 = host word (7)
    prog.push_back(a_add(3, 3, 1));                 // 23 R3 = 8
    prog.push_back(a_add(3, 3, 8));                 // 24
    prog.push_back(a_st(3, 2, 4));                  // 25 word 17 = 8
    prog.push_back(a_qwait(3000));                  // 26 label 8
    prog.push_back(a_ldi(5, 0));                    // 27
    prog.push_back(a_ldi(6, 20));                   // 28
    prog.push_back(a_ldi(7, 1));                    // 29
    lbl_loop1 = prog.size();
    prog.push_back(a_bundle(1, X, 5, 0, 0));        // 30 20 x (X on q5), 1 cycle apart
    prog.push_back(a_add(5, 5, 7));
    prog.push_back(a_cmp(5, 6));
    prog.push_back(a_nop());
    prog.push_back(a_br(CF_NE, -4));
    prog.push_back(a_ldi(5, 0));
    prog.push_back(a_ldi(6, 40));
    lbl_loop2 = prog.size();
    prog.push_back(a_qwait(100));                   // 40 timing points, 100 cycles apart
    prog.push_back(a_add(5, 5, 7));
    prog.push_back(a_cmp(5, 6));
    prog.push_back(a_nop());
    prog.push_back(a_br(CF_NE, -4));
    prog.push_back(a_bundle(1, X, 0, 0, 0));        // X on q0 after the QWAIT burst
    prog.push_back(a_qwait(1));                     // a point that will be closed late
    prog.push_back(a_ldi(5, 0));
    prog.push_back(a_ldi(6, 1500));
    lbl_loop3 = prog.size();
    prog.push_back(a_add(5, 5, 7));                 // classical busy loop
    prog.push_back(a_cmp(5, 6));
    prog.push_back(a_nop());
    prog.push_back(a_br(CF_NE, -3));
    prog.push_back(a_qwait(5));                     // closes the previous point: late
    prog.push_back(a_bundle(0, Y, 5, 0, 0));        // Y on q5
    prog.push_back(a_stop());

    // ----- host: load
    #12 rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk); host_imem_we = 1; host_imem_addr = 15'(i); host_imem_wdata = prog[i];
    end
    @(negedge clk); host_imem_we = 0;
    uc(X, 0, 0, XF_ALWAYS, 8'h09, 0);
    uc(Y, 0, 0, XF_ALWAYS, 8'h0a, 0);
    uc(MEASZ, 0, 1, XF_ALWAYS, 8'h06, 0);
    uc(CMEAS, 0, 1, XF_ONE, 8'h07, 0);
    uc(CX1, 0, 0, XF_ONE, 8'h20, 0);
    uc(CZ, 1, 0, XF_ALWAYS, 8'h80, 8'h81, 2, 8'h90, 8'h91);   // two codewords, 2 cycles apart
    @(negedge clk); host_dmem_en = 1; host_dmem_we = 1; host_dmem_addr = 10'd16; host_dmem_wdata = 32'd7;
    @(negedge clk); host_dmem_en = 0; host_dmem_we = 0;
    @(negedge clk); run = 1;

    wait (stopped);
    repeat (100) @(posedge clk);
    @(negedge clk); host_dmem_en = 1; host_dmem_addr = 10'd17;
    @(negedge clk); host_dmem_en = 0;
    chk(host_dmem_rdata == 32'd8, "data memory result (LD, ADD, FMR value, ST)");

    // ----- codewords and timing
    t_x    = first_cw(0, 8'h09);
    t_cz   = first_cw(3, 8'h80);
    t_meas = first_cw(1, 8'h06);
    t_y    = first_cw(0, 8'h0a);
    t_c1   = first_cw(1, 8'h20);
    chk(t_x != 0 && first_cw(2, 8'h09) == t_x && first_cw(5, 8'h09) == t_x, "X on q0, q2, q5 together");
    chk(t_cz == t_x && first_cw(1, 8'h81) == t_x, "CZ source/target in the same timing point");
    chk(first_cw(3, 8'h90) == t_x + 2 && first_cw(1, 8'h91) == t_x + 2, "CZ second codewords 2 cycles later");
    chk(t_meas - t_x == 4, "PI = 4 spacing");
    chk(t_y - t_meas == 31, "QWAIT 30 then PI = 1");
    chk(t_c1 - t_y == 1, "conditional op one cycle later");
    chk(count_cw(0, 8'h20) == 0, "gated op on q0 dropped (last result 0)");
    chk(count_cw(0, 8'h07) == 0, "gated measurement on q0 dropped");
    chk(count_cw(0, 8'h09) == 2, "skipped X not issued; final X issued");
    chk(count_cw(5, 8'h09) == 21, "20 X on q5 plus the parallel one");
    begin
      int unsigned tprev = 0, bad = 0, n = 0;
      foreach (cwlog[i]) if (cwlog[i].q == 5 && cwlog[i].c == 8'h09 && cwlog[i].t > t_x) begin
        if (n > 0 && n < 16 && cwlog[i].t - tprev != 1) bad++;   // the 16 buffered in the event queue
        if ($test$plusargs("trace") && n > 0) $display("burst gap %0d: %0d", n, cwlog[i].t - tprev);
        if (n == 0 && cwlog[i].t - t_c1 != 3000 + 2) begin bad++; $display("burst offset %0d", cwlog[i].t - t_c1); end   // labels 7 (+1), 8 (+3000), 9 (+1)
        tprev = cwlog[i].t; n++;
      end
      if (n != 20 || bad != 0) $display("burst n=%0d bad=%0d", n, bad);
      chk(n == 20 && bad == 0, "burst: QWAIT 3000, then the 16 queued ops 1 cycle apart");
      chk(first_cw(0, 8'h09) == t_x && cwlog[$].c == 8'h0a && cwlog[$].q == 5, "last op is Y on q5");
      foreach (cwlog[i]) if (cwlog[i].q == 0 && cwlog[i].c == 8'h09 && cwlog[i].t > t_x)
        chk(cwlog[i].t - tprev == 40 * 100 + 1, "X after 40 x QWAIT 100");
    end
    if ($test$plusargs("trace")) foreach (cwlog[i]) if (cwlog[i].q != 5 || i < 8) $display("cw t=%0d q=%0d c=%h", cwlog[i].t, cwlog[i].q, cwlog[i].c);
    chk(dut.u_core.u_gpr.regs[8] == 0 && dut.u_core.u_gpr.regs[1] == 1, "FMR values");
    if (n_meas != 1) $display("n_meas=%0d", n_meas);
    chk(n_meas == 1, "exactly one measurement performed");
    chk(!op_conflict, "no operand conflict");
    chk(timing_late, "late timing point flagged");

    // ----- every mechanism happened
    chk(n_fmr_stall > 0,   "FMR stall happened");
    chk(n_ld_stall > 0,    "LD stall happened");
    chk(n_evq_stall > 0,   "event-queue-full stall happened");
    chk(n_tq_stall > 0,    "timing-queue-full stall happened");
    chk(n_taken > 0,       "taken branch happened");
    chk(n_cond_exec > 0,   "conditional op executed");
    chk(n_cond_drop > 0,   "conditional op dropped");
    chk(n_meas_cancel > 0, "measurement cancelled");
    chk(n_late > 0,        "late timing point happened");
    chk(count_cw(3, 8'h90) + count_cw(1, 8'h91) > 0, "second codeword of a decomposition issued");
    $display("mechanisms: fmr_stall=%0d ld_stall=%0d evq_stall=%0d tq_stall=%0d taken=%0d cond_exec=%0d cond_drop=%0d meas_cancel=%0d late=%0d retired=%0d cycles=%0d",
             n_fmr_stall, n_ld_stall, n_evq_stall, n_tq_stall, n_taken, n_cond_exec, n_cond_drop, n_meas_cancel, n_late, n_retired, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
