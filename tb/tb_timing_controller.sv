// tb_timing_controller -- self-checking test of the timing queue and timer.
// Pushes timing points with known intervals and checks the cycle at which
// each label is emitted (interval cycles after the previous emission), that
// a point is held until a later one is queued or the queue is closed, that a
// late point is flagged (also when only one cycle late), and that `full` rises at DEPTH entries.
module tb_timing_controller;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push, full, closed, emit, late;
  label_t push_label, emit_label;
  wait_t push_wait;
  int checks = 0, failures = 0;
  int cyc = 0;
  int emit_cyc [int];
  int late_cnt = 0;
  bit late_lab [int];

  timing_controller #(.DEPTH(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (emit) emit_cyc[int'(emit_label)] = cyc;
    if (late) begin late_cnt++; late_lab[int'(emit_label)] = 1; end
  end

  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic pushp(int lab, int w);
    @(negedge clk); push = 1; push_label = label_t'(lab); push_wait = wait_t'(w);
    @(negedge clk); push = 0;
  endtask

  initial begin
    push = 0; closed = 0; push_label = 0; push_wait = 0;
    #12 rst_n = 1;
    // label 0 (start) must wait until label 1 exists
    repeat (5) @(posedge clk);
    checks++; if (emit_cyc.exists(0)) failures++;
    // queue labels 1..5 quickly, with intervals 10, 3, 1, 20, 7
    pushp(1, 10); pushp(2, 3); pushp(3, 1); pushp(4, 20); pushp(5, 7);
    repeat (60) @(posedge clk);
    checks++; if (!emit_cyc.exists(0)) failures++;
    checks++; if (emit_cyc[1] - emit_cyc[0] != 10) begin failures++; $display("1: %0d", emit_cyc[1]-emit_cyc[0]); end
    checks++; if (emit_cyc[2] - emit_cyc[1] != 3)  failures++;
    checks++; if (emit_cyc[3] - emit_cyc[2] != 1)  failures++;
    checks++; if (emit_cyc[4] - emit_cyc[3] != 20) failures++;
    // label 5 is the last point: not released until closed
    checks++; if (emit_cyc.exists(5)) failures++;
    checks++; if (late_cnt != 0) failures++;
    @(negedge clk); closed = 1;
    @(posedge clk); #1;
    checks++; if (!emit_cyc.exists(5) || late_cnt != 1) begin failures++; $display("late %0d", late_cnt); end
    @(negedge clk); closed = 0;
    // fill: with nothing emitted (long first interval) the queue fills at 8
    pushp(6, 1000);
    for (int i = 7; i < 14; i++) pushp(i, 1);
    #1;
    checks++; if (!full) begin failures++; $display("not full"); end
    @(negedge clk); closed = 1;
    repeat (1100) @(posedge clk);
    checks++; if (emit_cyc[6] - emit_cyc[5] != 1000) begin failures++; $display("6: %0d", emit_cyc[6]-emit_cyc[5]); end
    checks++; if (!emit_cyc.exists(13) || emit_cyc[13] - emit_cyc[6] != 7) failures++;
    checks++; if (full) failures++;
    // a point released exactly one cycle after its time is flagged late;
    // one released on time is not
    @(negedge clk); closed = 0;
    begin
      pushp(14, 50); pushp(15, 5);
      while (!emit_cyc.exists(14)) begin @(posedge clk); #1; end
      repeat (5) @(posedge clk);
      @(negedge clk); closed = 1;
      repeat (2) @(posedge clk); #1;
      checks++; if (emit_cyc[15] - emit_cyc[14] != 6 || !late_lab.exists(15)) begin failures++; $display("15: %0d late %0d", emit_cyc[15] - emit_cyc[14], late_lab.exists(15)); end
      pushp(16, 5);
      repeat (10) @(posedge clk); #1;
      checks++; if (emit_cyc[16] - emit_cyc[15] != 5 || late_lab.exists(16)) begin failures++; $display("16: %0d late %0d", emit_cyc[16] - emit_cyc[15], late_lab.exists(16)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
