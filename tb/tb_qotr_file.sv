// tb_qotr_file -- self-checking test of the S and T target register files:
// reset to empty masks, random SMIS/SMIT-style writes, both read slots.
//
// S and T writes are applied at negative edges and appear at the next rising
// edge; both read slots are combinational and compared right after it.  The
// register counts and mask widths follow SMIS/SMIT; reset to empty masks is
// this design's choice.
module tb_qotr_file;
  logic clk = 0, rst_n = 0;
  logic s_we, t_we;
  logic [4:0] s_waddr, t_waddr;
  logic [6:0] s_wdata;
  logic [15:0] t_wdata;
  logic [1:0][4:0] raddr;
  logic [1:0][6:0] s_rdata;
  logic [1:0][15:0] t_rdata;
  logic [6:0] ms [32];
  logic [15:0] mt [32];
  int checks = 0, failures = 0;

  qotr_file dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s_we = 0; t_we = 0; s_waddr = 0; t_waddr = 0; s_wdata = 0; t_wdata = 0; raddr = '0;
    foreach (ms[i]) begin ms[i] = 0; mt[i] = 0; end
    #12 rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      s_we = $urandom % 2; t_we = $urandom % 2;
      s_waddr = 5'($urandom); t_waddr = 5'($urandom);
      s_wdata = 7'($urandom); t_wdata = 16'($urandom);
      raddr[0] = 5'($urandom); raddr[1] = 5'($urandom);
      #1;
      for (int k = 0; k < 2; k++) begin
        checks++; if (s_rdata[k] !== ms[raddr[k]]) failures++;
        checks++; if (t_rdata[k] !== mt[raddr[k]]) failures++;
      end
      @(posedge clk);
      if (s_we) ms[s_waddr] = s_wdata;
      if (t_we) mt[t_waddr] = t_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
