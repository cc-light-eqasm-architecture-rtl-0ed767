// tb_event_distributor -- self-checking test of the per-qubit event queues
// and fast conditional execution.  Queues operations for several labels,
// emits the labels, and checks which codewords come out one cycle later,
// that measurements pulse meas_trig, that a flag-gated operation is dropped
// (and a dropped measurement pulses meas_cancel), and that a second
// operation with an already emitted label fires late.  Two-codeword
// operations: the second codeword appears exactly dly2 cycles after the
// first, is suppressed with the first when the flag is 0, slips by one cycle
// (late_fire) when a new operation takes the output, and is lost with an
// `overlap` pulse when a new two-codeword operation replaces it.
module tb_event_distributor;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [6:0] push, full, cw_valid, meas_trig, meas_cancel;
  event_t [6:0] push_data;
  logic emit, late_fire, overlap;
  int unsigned cyc = 0;
  typedef struct { int unsigned t; int q; int c; } rec_t;
  rec_t log_q [$];
  int n_overlap = 0, n_late = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int q = 0; q < 7; q++) if (cw_valid[q]) log_q.push_back('{cyc, q, int'(cw[q])});
    if (overlap) n_overlap++;
    if (late_fire) n_late++;
  end
  function automatic int unsigned t_of(int q, int c);
    foreach (log_q[i]) if (log_q[i].q == q && log_q[i].c == c) return log_q[i].t;
    return 0;
  endfunction
  function automatic event_t ev2(int lab, int c, int cond, int d, int c2);
    return '{label: label_t'(lab), cw: cw_t'(c), cond: 2'(cond), is_meas: 1'b0, dly2: 4'(d), cw2: cw_t'(c2)};
  endfunction
  task automatic emit_only(int lab);
    @(negedge clk); emit = 1; emit_label = label_t'(lab);
    @(negedge clk); emit = 0;
  endtask
  label_t emit_label;
  logic [6:0][3:0] xflags;
  cw_t [6:0] cw;
  int checks = 0, failures = 0;

  event_distributor #(.DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic event_t ev(int lab, int c, int cond, bit m);
    return '{label: label_t'(lab), cw: cw_t'(c), cond: 2'(cond), is_meas: m, default: '0};
  endfunction

  task automatic emit_and_check(int lab, logic [6:0] exp_v, cw_t exp_cw [7], logic [6:0] exp_m, logic [6:0] exp_c);
    @(negedge clk); emit = 1; emit_label = label_t'(lab);
    @(negedge clk); emit = 0;
    checks++; if (cw_valid !== exp_v) begin failures++; $display("label %0d valid %b exp %b", lab, cw_valid, exp_v); end
    for (int q = 0; q < 7; q++) if (exp_v[q]) begin
      checks++; if (cw[q] !== exp_cw[q]) begin failures++; $display("q%0d cw %h exp %h", q, cw[q], exp_cw[q]); end
    end
    checks++; if (meas_trig !== exp_m) failures++;
    checks++; if (meas_cancel !== exp_c) failures++;
  endtask

  initial begin
    cw_t e [7];
    push = 0; push_data = '0; emit = 0; emit_label = 0;
    for (int q = 0; q < 7; q++) xflags[q] = 4'b0101;   // last result 0: ALWAYS, ZERO
    #12 rst_n = 1;
    // label 1: q0 cw 9 unconditional, q2 cw 10 if result was 1 (false)
    //          q3 measurement unconditional, q4 measurement if result 1 (false)
    @(negedge clk);
    push = 7'b0011101;
    push_data[0] = ev(1, 9, XF_ALWAYS, 0);
    push_data[2] = ev(1, 10, XF_ONE, 0);
    push_data[3] = ev(1, 6, XF_ALWAYS, 1);
    push_data[4] = ev(1, 6, XF_ONE, 1);
    @(negedge clk);
    // label 2: q0 cw 11 if result was 0 (true), q6 cw 8'h81
    push = 7'b1000001;
    push_data[0] = ev(2, 11, XF_ZERO, 0);
    push_data[6] = ev(2, 8'h81, XF_ALWAYS, 0);
    @(negedge clk); push = 0;
    // nothing fires before the label is emitted
    repeat (3) begin @(negedge clk); checks++; if (cw_valid !== 0) failures++; end
    foreach (e[i]) e[i] = 0;
    e[0] = 9; e[3] = 6;
    emit_and_check(1, 7'b0001001, e, 7'b0001000, 7'b0010000);
    foreach (e[i]) e[i] = 0;
    e[0] = 11; e[6] = 8'h81;
    emit_and_check(2, 7'b1000001, e, 0, 0);
    // label 3 pushed twice on q5 (two ops in one timing point): second fires late
    @(negedge clk); push = 7'b0100000; push_data[5] = ev(3, 20, XF_ALWAYS, 0);
    @(negedge clk); push_data[5] = ev(3, 21, XF_ALWAYS, 0);
    @(negedge clk); push = 0;
    foreach (e[i]) e[i] = 0;
    e[5] = 20;
    emit_and_check(3, 7'b0100000, e, 0, 0);
    @(posedge clk); #1; checks++; if (cw_valid !== 7'b0100000 || cw[5] !== 21 || !late_fire) begin failures++; $display("late op"); end
    // SAME flag: ops gated on "last two equal"
    xflags[1] = 4'b0011;   // last 1, previous 0 -> SAME false
    @(negedge clk); push = 7'b0000010; push_data[1] = ev(4, 33, XF_SAME, 0);
    @(negedge clk); push = 0;
    foreach (e[i]) e[i] = 0;
    emit_and_check(4, 0, e, 0, 0);
    // two-codeword operations
    @(negedge clk); push = 7'b0011100;
    push_data[2] = ev2(20, 8'h40, XF_ALWAYS, 3, 8'h41);
    push_data[3] = ev2(20, 8'h48, XF_ONE, 2, 8'h49);        // flag 0: both dropped
    push_data[4] = ev2(20, 8'h60, XF_ALWAYS, 15, 8'h61);
    @(negedge clk); push = 7'b0001100;
    push_data[2] = ev2(21, 8'h50, XF_ALWAYS, 2, 8'h51);
    push_data[3] = ev(21, 8'h4a, XF_ALWAYS, 0);
    @(negedge clk); push = 7'b0010100;
    push_data[2] = ev(22, 8'h52, XF_ALWAYS, 0);
    push_data[4] = ev2(22, 8'h62, XF_ALWAYS, 2, 8'h63);
    @(negedge clk); push = 0;
    begin
      int l0, o0;
      l0 = n_late; o0 = n_overlap;
      emit_only(20);                       // fires 0x40 (q2), 0x60 (q4)
      repeat (3) @(negedge clk);
      emit_only(21);                       // q2: 0x50 four cycles after 0x40
      emit_only(22);                       // q2: 0x52 when 0x51 falls due; q4: replaces 0x61
      repeat (20) @(negedge clk);
      checks++; if (t_of(2, 8'h41) - t_of(2, 8'h40) != 3) begin failures++; $display("dly2 %0d", t_of(2, 8'h41) - t_of(2, 8'h40)); end
      checks++; if (t_of(3, 8'h48) != 0 || t_of(3, 8'h49) != 0 || t_of(3, 8'h4a) == 0) begin failures++; $display("gated pair"); end
      checks++; if (t_of(2, 8'h52) - t_of(2, 8'h50) != 2 || t_of(2, 8'h51) - t_of(2, 8'h50) != 3) begin
        failures++; $display("slip 50 %0d 51 %0d 52 %0d", t_of(2, 8'h50), t_of(2, 8'h51), t_of(2, 8'h52)); end
      checks++; if (n_late - l0 != 1) begin failures++; $display("slip late %0d", n_late - l0); end
      checks++; if (t_of(4, 8'h61) != 0 || t_of(4, 8'h63) - t_of(4, 8'h62) != 2 || n_overlap - o0 != 1) begin
        failures++; $display("overlap 61 %0d 62 %0d 63 %0d n %0d", t_of(4, 8'h61), t_of(4, 8'h62), t_of(4, 8'h63), n_overlap - o0); end
    end
    // full flag at DEPTH = 4
    for (int i = 0; i < 4; i++) begin @(negedge clk); push = 7'b0000001; push_data[0] = ev(10 + i, i, 0, 0); end
    @(negedge clk); push = 0; #1;
    checks++; if (full !== 7'b0000001) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
