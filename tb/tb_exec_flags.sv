// tb_exec_flags -- self-checking test of the execution flags: random result
// streams per qubit, the four flags against a two-entry history model.
//
// Results arrive on `res_valid`/`res` at negative edges; the four flags of
// every qubit are compared after each rising edge, i.e. the flags reflect a
// finished measurement from the next cycle on.  The flag definitions are the
// instruction set's; the reset history (two results of 0) is this design's.
module tb_exec_flags;
  logic clk = 0, rst_n = 0;
  logic [6:0] res_valid, res;
  logic [6:0][3:0] flags;
  logic [6:0] l1, l2;
  int checks = 0, failures = 0;

  exec_flags dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cmp();
    for (int q = 0; q < 7; q++) begin
      logic [3:0] e;
      e = {l1[q] == l2[q], !l1[q], l1[q], 1'b1};
      checks++; if (flags[q] !== e) begin failures++; $display("q%0d flags %b exp %b", q, flags[q], e); end
    end
  endtask

  initial begin
    res_valid = 0; res = 0; l1 = 0; l2 = 0;
    #12 rst_n = 1; #1 cmp();
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      res_valid = 7'($urandom); res = 7'($urandom);
      #1 cmp();                      // flags change only at the clock edge
      @(posedge clk);
      for (int q = 0; q < 7; q++) if (res_valid[q]) begin l2[q] = l1[q]; l1[q] = res[q]; end
      #1 cmp();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
