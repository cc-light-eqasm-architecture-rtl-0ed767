// tb_qmrr_file -- self-checking test of the measurement result registers:
// validity while measurements are outstanding, stored values, cancellation,
// saturation flag, against a counter model.
//
// `issue`, `cancel` and `res_valid` are driven at negative edges with random
// timing; validity and values are checked after every rising edge against a
// per-qubit counter model, so FMR's "wait until the last measurement has
// finished" is checked cycle by cycle.  The 1-bit registers Q0..Q6 follow the
// instruction set; the counter and its width are this design's choices.
module tb_qmrr_file;
  logic clk = 0, rst_n = 0;
  logic [6:0] issue, cancel, res_valid, res, valid, value, sat;
  int pend [7];
  logic [6:0] mval;
  int checks = 0, failures = 0;

  qmrr_file dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cmp();
    for (int q = 0; q < 7; q++) begin
      checks++; if (valid[q] !== (pend[q] == 0)) failures++;
      checks++; if (value[q] !== mval[q]) failures++;
      checks++; if (sat[q] !== (pend[q] == 15)) failures++;
    end
  endtask

  initial begin
    issue = 0; cancel = 0; res_valid = 0; res = 0; mval = 0;
    foreach (pend[i]) pend[i] = 0;
    #12 rst_n = 1; #1 cmp();
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      for (int q = 0; q < 7; q++) begin
        issue[q]     = (pend[q] < 15) && ($urandom % 3 == 0) && (n < 300 || n % 50 < 20);
        res_valid[q] = (pend[q] > 0) && ($urandom % 3 == 0);
        cancel[q]    = (pend[q] > (res_valid[q] ? 1 : 0)) && ($urandom % 8 == 0);
      end
      res = 7'($urandom);
      @(posedge clk);
      for (int q = 0; q < 7; q++) begin
        pend[q] += int'(issue[q]) - int'(res_valid[q]) - int'(cancel[q]);
        if (res_valid[q]) mval[q] = res[q];
      end
      #1 cmp();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
