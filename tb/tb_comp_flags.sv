// tb_comp_flags -- self-checking test of the comparison flag register: reset
// values, writes only on `we`, selection of every code, ALWAYS/NEVER fixed.
//
// Writes happen on rising clock edges with `we`; the selected flag is read
// combinationally and checked one time unit after each edge, so the test also
// confirms that a read in the cycle after CMP sees the new flags.  ALWAYS = 1
// and NEVER = 0 are fixed by the instruction set; the reset values of the
// other flags and codes 12..15 reading 0 are this design's choices.
module tb_comp_flags;
  import eqasm_pkg::*;
  logic clk = 0, rst_n = 0, we, flag;
  logic [NCFLAGS-1:0] flags_in, model;
  logic [3:0] sel;
  int checks = 0, failures = 0;

  comp_flags dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all();
    for (int s = 0; s < 16; s++) begin
      logic e;
      sel = 4'(s); #1;
      if (s == 0) e = 1; else if (s == 1 || s > 11) e = 0; else e = model[s];
      checks++; if (flag !== e) begin failures++; $display("sel %0d got %b exp %b", s, flag, e); end
    end
  endtask

  initial begin
    we = 0; flags_in = '0; sel = 0; model = '0;
    #12 rst_n = 1;
    check_all();
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      we = $urandom % 2; flags_in = NCFLAGS'($urandom);
      @(posedge clk); if (we) model = flags_in;
      #1 we = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
