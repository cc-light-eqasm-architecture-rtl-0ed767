// tb_eqasm_core -- self-checking test of the eQASM instruction pipeline.
//
// The core runs a program built with eqasm_asm_pkg against testbench models
// of the memories, the control store and the quantum back end.  The program
// exercises every instruction: arithmetic/logic results, LDI/LDUI, LD/ST
// with positive and negative offsets, CMP + FBR + BR (taken and not taken, a
// counted loop), SMIS/SMIT, QWAIT/QWAITR, bundles with PI > 0 and PI = 0,
// FMR waiting for a measurement, and STOP.  Results are stored to data memory
// and compared with values worked out by hand; timing-queue pushes and
// per-qubit event pushes are compared with the expected list.  The back end
// randomly reports full queues to exercise the stalls.  Cycle checks: plain
// instructions retire one per cycle, LD takes two cycles, a taken branch
// costs no bubble.
module tb_eqasm_core;
  import eqasm_pkg::*;
  import eqasm_asm_pkg::*;

  logic clk = 0, rst_n = 0, run = 0;
  logic [14:0] imem_addr;
  logic [31:0] imem_rdata;
  logic dm_en, dm_we;
  logic [9:0] dm_addr;
  logic [31:0] dm_wdata, dm_rdata;
  qop_t [1:0] uc_opcode;
  ucode_t [1:0] uc_entry;
  logic tq_push, tq_full;
  label_t tq_label;
  wait_t tq_wait;
  logic [6:0] ev_push, ev_full, meas_issue, qmrr_valid, qmrr_value, qmrr_sat;
  event_t [6:0] ev_data;
  logic tl_close, stopped, op_conflict, retire;
  logic [16:0] pc;

  eqasm_core dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- memories and control store models
  logic [31:0] imem [128];
  logic [31:0] dmem [1024];
  ucode_t      ucs  [512];
  always_ff @(posedge clk) begin
    imem_rdata <= imem[imem_addr[6:0]];
    if (dm_en && dm_we) dmem[dm_addr] <= dm_wdata;
    if (dm_en && !dm_we) dm_rdata <= dmem[dm_addr];
  end
  always_comb for (int k = 0; k < 2; k++) uc_entry[k] = ucs[uc_opcode[k]];

  // ---- back-end model: random back-pressure, measurement completes later
  int cyc = 0, meas_cnt = 0, fmr_wait = 0;
  int ret_cyc [int];
  int tq_n = 0;
  int tq_lab [8], tq_w [8];
  event_t evlog [7][$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    tq_full <= ($urandom % 3) == 0;
    ev_full <= 7'($urandom) & 7'($urandom);
    if (retire) ret_cyc[int'(pc)] = cyc;
    if ($test$plusargs("trace") && dut.x_valid) $display("%0d pc=%0d ir=%h stall=%b ret=%b taken=%b", cyc, pc/4, dut.ir, dut.stall, retire, dut.taken);
    if (tq_push) begin
      chk(!tq_full, "push while full");
      if (tq_n < 8) begin tq_lab[tq_n] = int'(tq_label); tq_w[tq_n] = int'(tq_wait); end
      tq_n++;
    end
    for (int q = 0; q < 7; q++) if (ev_push[q]) begin
      chk(!ev_full[q], "event push while full");
      evlog[q].push_back(ev_data[q]);
    end
    if (|meas_issue) begin meas_cnt = 20; qmrr_valid <= qmrr_valid & ~meas_issue; end
    else if (meas_cnt > 0) begin
      meas_cnt--;
      if (meas_cnt == 0) begin qmrr_valid <= '1; qmrr_value <= 7'b0000100; end
    end
    if (dut.v && dut.op == OP_FMR && dut.stall) fmr_wait++;
  end

  localparam int BASE = 256;   // byte address of the result area (word 64)

  initial begin
    int p;
    for (int i = 0; i < 128; i++) imem[i] = a_stop();
    foreach (dmem[i]) dmem[i] = 0;
    foreach (ucs[i]) ucs[i] = '0;
    ucs[9]     = '{two_qubit:0, is_meas:0, cond:XF_ALWAYS, cw_src:8'd9,   cw_tgt:8'd0, default:'0};
    ucs[6]     = '{two_qubit:0, is_meas:1, cond:XF_ALWAYS, cw_src:8'd6,   cw_tgt:8'd0, default:'0};
    ucs[9'h80] = '{two_qubit:1, is_meas:0, cond:XF_ALWAYS, cw_src:8'h80, cw_tgt:8'h81, dly2:4'd3, cw2_src:8'h90, cw2_tgt:8'h91, default:'0};
    qmrr_valid = '1; qmrr_value = '0; qmrr_sat = '0; tq_full = 0; ev_full = 0;
    p = 0;
    imem[p++] = a_ldi(1, 5);                 // 0
    imem[p++] = a_ldi(2, -3);                // 1
    imem[p++] = a_add(3, 1, 2);              // 2   2
    imem[p++] = a_sub(4, 1, 2);              // 3   8
    imem[p++] = a_and(5, 1, 2);              // 4   5
    imem[p++] = a_or (6, 1, 2);              // 5   fffffffd
    imem[p++] = a_xor(7, 1, 2);              // 6   fffffff8
    imem[p++] = a_not(8, 1);                 // 7   fffffffa
    imem[p++] = a_ldui(9, 1, 15'h1234);      // 8   (0x1234 << 17) | 5
    imem[p++] = a_ldi(10, BASE);             // 9
    imem[p++] = a_st(3, 10, 0);              // 10
    imem[p++] = a_st(4, 10, 4);              // 11
    imem[p++] = a_st(5, 10, 8);              // 12
    imem[p++] = a_st(6, 10, 12);             // 13
    imem[p++] = a_st(7, 10, 16);             // 14
    imem[p++] = a_st(8, 10, 20);             // 15
    imem[p++] = a_st(9, 10, 24);             // 16
    imem[p++] = a_ld(11, 10, 4);             // 17  r11 = 8
    imem[p++] = a_add(12, 11, 11);           // 18  16, right after LD
    imem[p++] = a_st(12, 10, -4);            // 19  word 63
    imem[p++] = a_cmp(1, 2);                 // 20  Rt=-3, Rs=5
    imem[p++] = a_fbr(CF_LT, 13);            // 21  1
    imem[p++] = a_fbr(CF_GTU, 14);           // 22  1
    imem[p++] = a_fbr(CF_EQ, 15);            // 23  0
    imem[p++] = a_br(CF_LTU, 3);             // 24  not taken
    imem[p++] = a_br(CF_GT, 3);              // 25  not taken
    imem[p++] = a_br(CF_LT, 3);              // 26  taken -> 29
    imem[p++] = a_ldi(16, 99);               // 27  skipped
    imem[p++] = a_ldi(16, 98);               // 28  skipped
    imem[p++] = a_st(13, 10, 28);            // 29
    imem[p++] = a_st(14, 10, 32);            // 30
    imem[p++] = a_st(15, 10, 36);            // 31
    imem[p++] = a_st(16, 10, 40);            // 32  0
    imem[p++] = a_ldi(17, 0);                // 33
    imem[p++] = a_ldi(18, 3);                // 34
    imem[p++] = a_ldi(19, 1);                // 35
    imem[p++] = a_add(17, 17, 19);           // 36  loop:
    imem[p++] = a_cmp(17, 18);               // 37
    imem[p++] = a_nop();                     // 38
    imem[p++] = a_br(CF_NE, -3);             // 39  -> 36
    imem[p++] = a_st(17, 10, 44);            // 40  3
    imem[p++] = a_smis(2, 7'b0000101);       // 41  S2 = {q0, q2}
    imem[p++] = a_smit(1, 16'h0084);         // 42  T1 = pairs 2 (3->1), 7 (6->4)
    imem[p++] = a_qwait(100);                // 43  label 1
    imem[p++] = a_bundle(1, 9, 2, 9'h80, 1); // 44  label 2
    imem[p++] = a_ldi(20, 50);               // 45
    imem[p++] = a_qwaitr(20);                // 46  label 3
    imem[p++] = a_bundle(0, 6, 2, 0, 0);     // 47  measure q0, q2 at label 3
    imem[p++] = a_fmr(21, 2);                // 48  waits for the result (1)
    imem[p++] = a_st(21, 10, 48);            // 49
    imem[p++] = a_stop();                    // 50

    #12 rst_n = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) run = 1;
    wait (stopped);
    repeat (5) @(posedge clk);

    chk(dmem[64] == 32'd2,        "ADD");
    chk(dmem[65] == 32'd8,        "SUB");
    chk(dmem[66] == 32'd5,        "AND");
    chk(dmem[67] == 32'hfffffffd, "OR");
    chk(dmem[68] == 32'hfffffff8, "XOR");
    chk(dmem[69] == 32'hfffffffa, "NOT");
    chk(dmem[70] == ((32'h1234 << 17) | 32'd5), "LDUI");
    chk(dmem[63] == 32'd16,       "LD then ADD, negative offset");
    chk(dmem[71] == 32'd1,        "FBR LT");
    chk(dmem[72] == 32'd1,        "FBR GTU");
    chk(dmem[73] == 32'd0,        "FBR EQ");
    chk(dmem[74] == 32'd0,        "taken branch skips");
    chk(dmem[75] == 32'd3,        "loop");
    chk(dmem[76] == 32'd1,        "FMR");
    chk(!ret_cyc.exists(27*4) && !ret_cyc.exists(28*4), "no delay slot");
    chk(ret_cyc[16*4] - ret_cyc[0] == 16, "one instruction per cycle");
    chk(ret_cyc[18*4] - ret_cyc[17*4] == 1, "dependent ADD follows LD without a further stall");
    chk(ret_cyc[17*4] - ret_cyc[16*4] == 2, "LD occupies two cycles");
    chk(ret_cyc[29*4] - ret_cyc[26*4] == 1, "taken branch has no bubble");
    chk(fmr_wait >= 10, "FMR waited for the measurement");
    chk(tq_n == 3, "three timing points");
    chk(tq_lab[0] == 1 && tq_w[0] == 100, "QWAIT point");
    chk(tq_lab[1] == 2 && tq_w[1] == 1,   "PI point");
    chk(tq_lab[2] == 3 && tq_w[2] == 50,  "QWAITR point");
    chk(evlog[0].size() == 2 && evlog[2].size() == 2, "q0/q2 events");
    chk(evlog[0][0].cw == 9 && evlog[0][0].label == 2 && evlog[0][1].is_meas && evlog[0][1].label == 3, "q0 events");
    chk(evlog[3].size() == 1 && evlog[3][0].cw == 8'h80 && evlog[3][0].label == 2, "pair source q3");
    chk(evlog[1].size() == 1 && evlog[1][0].cw == 8'h81, "pair target q1");
    chk(evlog[3][0].dly2 == 3 && evlog[3][0].cw2 == 8'h90 && evlog[1][0].dly2 == 3 && evlog[1][0].cw2 == 8'h91, "second codeword carried");
    chk(evlog[6].size() == 1 && evlog[6][0].cw == 8'h80, "pair source q6");
    chk(evlog[4].size() == 1 && evlog[4][0].cw == 8'h81, "pair target q4");
    chk(evlog[5].size() == 0, "q5 untouched");
    chk(!op_conflict, "no conflict");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
