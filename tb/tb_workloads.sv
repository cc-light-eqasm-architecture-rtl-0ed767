// tb_workloads -- calibration-style experiments and a small algorithm run on
// the complete processor at its default sizes.
//
// The control store is configured with the opcode set of the CC-Light opcode
// map: prepz 0x02, MeasZ 0x06, microwave codewords cw_00..cw_31 at
// 0x08..0x27, conditional variants C1_cw_00..07 at 0x28..0x2f (executed only
// if the last result was 1) and C0_cw_00..08 at 0x30..0x38 (only if it was
// 0), and two-qubit flux operations fl_cw_00..07 at 0x80..0x87.  Each opcode
// sends the codeword equal to its own value.  The opcode values are those of
// the map; the codeword values and the flag choice per conditional group
// (C1 = "last result 1", C0 = "last result 0") are this testbench's reading.
//
// The qubit side is a behavioural model of qubits plus readout: prepz
// returns a qubit to |0>; cw_01 (an X) excites it, and it relaxes back
// TDECAY cycles later; a Rabi pulse cw_08 + a (a = 0..7, codewords
// 0x10..0x17) leaves it excited when a is 3, 4 or 5; a flux operation leaves
// both qubits as they are.  A measurement returns the state at the moment of
// its trigger, MEAS_LAT cycles later.
//
// Three programs run one after another in a single instruction stream:
//   * T1: eight rounds of prepz, X, a QWAITR delay of 10 + 20k cycles taken
//     from a GPR, MeasZ, FMR, and a store of the result; the delay between X
//     and MeasZ must be exactly 10 + 20k cycles and the results must follow
//     the relaxation time (1 for delays below TDECAY, 0 above);
//   * Rabi: eight unrolled rounds, one per amplitude variant cw_08..cw_15,
//     each prepz, pulse, MeasZ, FMR, store;
//   * a two-qubit Grover-shaped circuit on qubits 2 (x0), 0 (x1) and 3 (y):
//     an H layer on three qubits in one timing point, an oracle CZ on the
//     2->0 pair, a second H layer, a conditional C1 operation on qubit 3
//     gated by an earlier result, and a parallel measurement of both data
//     qubits.
// Checks: every stored result, the sum computed by the program, the cycle
// spacing of each experiment, codewords of parallel and conditional
// operations, and that the run ends with STOP.
module tb_workloads;
  import eqasm_pkg::*;
  import eqasm_asm_pkg::*;

  localparam int MEAS_LAT = 15;
  localparam int TDECAY   = 75;

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
  logic [6:0] meas_res_valid = '0, meas_res = '0;

  cclight_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- qubit and readout model
  typedef struct { int unsigned t; int q; int c; } cw_rec_t;
  cw_rec_t cwlog [$];
  int unsigned meas_log [7][$];
  int unsigned meas_due [7][$];
  bit          meas_val [7][$];
  bit          excited [7];
  int unsigned t_excite [7];
  bit          decays [7];
  int unsigned cyc = 0;

  always @(posedge clk) begin : qubits
    cyc <= cyc + 1;
    meas_res_valid <= '0;
    meas_res <= '0;
    if (rst_n) for (int q = 0; q < 7; q++) begin
      if (cw_valid[q]) begin
        cwlog.push_back('{cyc, q, int'(cw[q])});
        if (cw[q] == 8'h02) excited[q] = 0;                       // prepz
        else if (cw[q] == 8'h09) begin                            // cw_01: X, relaxes
          excited[q] = 1; decays[q] = 1; t_excite[q] = cyc;
        end else if (cw[q] >= 8'h10 && cw[q] <= 8'h17) begin      // Rabi variants
          excited[q] = (cw[q] >= 8'h13 && cw[q] <= 8'h15); decays[q] = 0;
        end
      end
      if (meas_trig[q]) begin
        bit v;
        v = excited[q] && (!decays[q] || cyc - t_excite[q] < TDECAY);
        meas_log[q].push_back(cyc);
        meas_due[q].push_back(cyc + MEAS_LAT);
        meas_val[q].push_back(v);
      end
      if (meas_due[q].size() > 0 && meas_due[q][0] == cyc) begin
        void'(meas_due[q].pop_front());
        meas_res_valid[q] <= 1'b1;
        meas_res[q] <= meas_val[q].pop_front();
      end
    end
  end

  function automatic int unsigned nth_cw(int q, int c, int n);
    int k = 0;
    foreach (cwlog[i]) if (cwlog[i].q == q && cwlog[i].c == c) begin
      if (k == n) return cwlog[i].t;
      k++;
    end
    return 0;
  endfunction
  function automatic int count_cw(int q, int c);
    int n = 0;
    foreach (cwlog[i]) if (cwlog[i].q == q && cwlog[i].c == c) n++;
    return n;
  endfunction

  task automatic uc(int opc, bit two, bit meas, int cond, int c);
    @(negedge clk);
    host_uc_we = 1; host_uc_addr = qop_t'(opc);
    host_uc_data = '{two_qubit: two, is_meas: meas, cond: 2'(cond), cw_src: cw_t'(c), cw_tgt: cw_t'(c), default: '0};
    @(negedge clk); host_uc_we = 0;
  endtask

  task automatic rd_dmem(int a, output logic [31:0] d);
    @(negedge clk); host_dmem_en = 1; host_dmem_we = 0; host_dmem_addr = 10'(a);
    @(negedge clk); host_dmem_en = 0;
    d = host_dmem_rdata;
  endtask

  localparam int PREPZ = 8'h02, MEASZ = 8'h06, CW01 = 8'h09, CW02 = 8'h0a, CW08 = 8'h10;
  localparam int C1_00 = 8'h28, C0_00 = 8'h30, FL00 = 8'h80;

  logic [31:0] prog [$];

  initial begin
    int top;
    logic [31:0] d;
    // ---------------- program
    prog.push_back(a_smis(2, 7'b0000100));           // S2 = {2}
    prog.push_back(a_smis(0, 7'b0000001));           // S0 = {0}
    prog.push_back(a_smis(5, 7'b0001101));           // S5 = {0, 2, 3}
    prog.push_back(a_smis(6, 7'b0000101));           // S6 = {0, 2}
    prog.push_back(a_smis(3, 7'b0001000));           // S3 = {3}
    prog.push_back(a_smit(1, 16'h0001));             // T1 = {(2, 0)}
    prog.push_back(a_ldi(1, 10));                    // R1 delay
    prog.push_back(a_ldi(2, 20));                    // R2 delay step
    prog.push_back(a_ldi(3, 0));                     // R3 round
    prog.push_back(a_ldi(4, 8));                     // R4 rounds
    prog.push_back(a_ldi(7, 1));
    prog.push_back(a_ldi(10, 0));                    // R10 sum of results
    prog.push_back(a_ldi(11, 0));                    // R11 store address
    prog.push_back(a_ldi(12, 4));
    // T1: rounds at data words 0..7
    top = prog.size();
    prog.push_back(a_qwait(50));
    prog.push_back(a_bundle(1, PREPZ, 2, 0, 0));
    prog.push_back(a_qwait(10));
    prog.push_back(a_bundle(1, CW01, 2, 0, 0));      // X
    prog.push_back(a_qwaitr(1));                     // wait R1 cycles
    prog.push_back(a_bundle(0, MEASZ, 2, 0, 0));
    prog.push_back(a_qwait(30));
    prog.push_back(a_fmr(5, 2));
    prog.push_back(a_st(5, 11, 0));
    prog.push_back(a_add(10, 10, 5));
    prog.push_back(a_add(11, 11, 12));
    prog.push_back(a_add(1, 1, 2));
    prog.push_back(a_add(3, 3, 7));
    prog.push_back(a_cmp(3, 4));
    prog.push_back(a_nop());
    prog.push_back(a_br(CF_NE, top - prog.size()));
    // Rabi: unrolled, data words 8..15
    for (int a = 0; a < 8; a++) begin
      prog.push_back(a_qwait(50));
      prog.push_back(a_bundle(1, PREPZ, 0, 0, 0));
      prog.push_back(a_qwait(10));
      prog.push_back(a_bundle(1, CW08 + a, 0, 0, 0));
      prog.push_back(a_qwait(4));
      prog.push_back(a_bundle(0, MEASZ, 0, 0, 0));
      prog.push_back(a_qwait(30));
      prog.push_back(a_fmr(5, 0));
      prog.push_back(a_st(5, 11, 0));
      prog.push_back(a_add(10, 10, 5));
      prog.push_back(a_add(11, 11, 12));
    end
    // Grover-shaped circuit: Rabi round 7 left q0 in |0>, q3 never measured
    prog.push_back(a_qwait(50));
    prog.push_back(a_bundle(1, PREPZ, 5, 0, 0));     // prepz on x0, x1, y
    prog.push_back(a_bundle(10, CW02, 5, 0, 0));     // H layer on three qubits
    prog.push_back(a_bundle(2, FL00, 1, 0, 0));      // oracle CZ on (2 -> 0)
    prog.push_back(a_bundle(4, CW02, 6, C1_00, 3));  // H on x0, x1; C1 on y (dropped)
    prog.push_back(a_bundle(1, C0_00, 3, 0, 0));     // C0 on y (executed)
    prog.push_back(a_bundle(1, MEASZ, 6, 0, 0));     // measure x0 and x1 together
    prog.push_back(a_qwait(30));
    prog.push_back(a_fmr(5, 2));
    prog.push_back(a_fmr(6, 0));
    prog.push_back(a_st(5, 11, 0));                  // word 16
    prog.push_back(a_st(6, 11, 4));                  // word 17
    prog.push_back(a_st(10, 11, 8));                 // word 18: sum of T1 and Rabi results
    prog.push_back(a_stop());

    // ---------------- host
    #12 rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk); host_imem_we = 1; host_imem_addr = 15'(i); host_imem_wdata = prog[i];
    end
    @(negedge clk); host_imem_we = 0;
    uc(PREPZ, 0, 0, XF_ALWAYS, PREPZ);
    for (int o = 4; o < 8; o++) uc(o, 0, 1, XF_ALWAYS, o);            // measurements
    for (int o = 8'h08; o <= 8'h27; o++) uc(o, 0, 0, XF_ALWAYS, o);   // cw_00..cw_31
    for (int o = 8'h28; o <= 8'h2f; o++) uc(o, 0, 0, XF_ONE, o);      // C1_cw_*
    for (int o = 8'h30; o <= 8'h38; o++) uc(o, 0, 0, XF_ZERO, o);     // C0_cw_*
    for (int o = 8'h80; o <= 8'h87; o++) uc(o, 1, 0, XF_ALWAYS, o);   // fl_cw_*
    @(negedge clk); run = 1;
    wait (stopped);
    repeat (50) @(posedge clk);

    // ---------------- T1
    for (int k = 0; k < 8; k++) begin
      int unsigned tx, tm;
      bit exp;
      tx = nth_cw(2, CW01, k);
      tm = meas_log[2].size() > k ? meas_log[2][k] : 0;
      chk(tm - tx == 10 + 20 * k, $sformatf("T1 round %0d: X to MeasZ is %0d cycles", k, tm - tx));
      exp = (10 + 20 * k) < TDECAY;
      rd_dmem(k, d);
      chk(d == 32'(exp), $sformatf("T1 round %0d result %0d", k, d));
    end
    // ---------------- Rabi
    for (int a = 0; a < 8; a++) begin
      int unsigned tp, tm;
      tp = nth_cw(0, CW08 + a, 0);
      tm = meas_log[0].size() > a ? meas_log[0][a] : 0;
      chk(tp != 0 && tm - tp == 4, $sformatf("Rabi round %0d: pulse to MeasZ is %0d cycles", a, tm - tp));
      rd_dmem(8 + a, d);
      chk(d == 32'(a >= 3 && a <= 5), $sformatf("Rabi round %0d result %0d", a, d));
    end
    // ---------------- Grover-shaped circuit
    begin
      int unsigned th;
      th = nth_cw(3, CW02, 0);
      chk(th != 0 && nth_cw(0, CW02, 0) == th && nth_cw(2, CW02, 0) == th, "H layer on three qubits in one point");
      chk(nth_cw(2, FL00, 0) - th == 2 && nth_cw(0, FL00, 0) - th == 2, "oracle CZ on both qubits of the pair, 2 cycles later");
      chk(nth_cw(0, CW02, 1) - th == 6 && nth_cw(2, CW02, 1) - th == 6, "second H layer 4 cycles after the CZ");
      chk(count_cw(3, C1_00) == 0, "C1 operation dropped (last result of y is 0)");
      chk(nth_cw(3, C0_00, 0) - th == 7, "C0 operation executed one cycle later");
      chk(meas_log[0].size() == 9 && meas_log[2].size() == 9 &&
          meas_log[0][8] == meas_log[2][8] && meas_log[0][8] - th == 8, "data qubits measured together");
    end
    rd_dmem(16, d); chk(d == 0, "x0 result");
    rd_dmem(17, d); chk(d == 0, "x1 result");
    rd_dmem(18, d); chk(d == 4 + 3, "sum of T1 and Rabi results computed by the program");
    chk(!op_conflict, "no operation conflict");
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
