// tb_gpr_file -- self-checking test of the 32 x 32 GPR file: reset to zero,
// random writes against a reference array, both read ports.
//
// Writes are applied at negative edges and take effect at the next rising
// edge; reads are combinational and are compared right after that edge.  The
// register count and width are the instruction set's; reset to zero and the
// two-read/one-write organisation are this design's choices.
module tb_gpr_file;
  logic clk = 0, rst_n = 0;
  logic [4:0] rs_addr, rt_addr, wd_addr;
  logic [31:0] rs_data, rt_data, wd_data;
  logic we;
  logic [31:0] ref_m [32];
  int checks = 0, failures = 0;

  gpr_file dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; rs_addr = 0; rt_addr = 0; wd_addr = 0; wd_data = 0;
    foreach (ref_m[i]) ref_m[i] = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      rs_addr = 5'(i); rt_addr = 5'(31-i); #1;
      checks++; if (rs_data !== 0 || rt_data !== 0) failures++;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = ($urandom % 2) == 0; wd_addr = 5'($urandom); wd_data = $urandom;
      rs_addr = 5'($urandom); rt_addr = 5'($urandom);
      #1;
      checks++; if (rs_data !== ref_m[rs_addr]) failures++;
      checks++; if (rt_data !== ref_m[rt_addr]) failures++;
      @(posedge clk); if (we) ref_m[wd_addr] = wd_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
