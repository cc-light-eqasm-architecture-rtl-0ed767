// tb_instr_mem -- self-checking test of the instruction memory: host writes,
// one-cycle synchronous read latency, a default-size instance.
//
// The host port writes one word per cycle; each read address is applied at a
// negative edge and its word is checked after the next rising edge.  The
// depth (32768 words, the reach of the 17-bit byte PC) follows the
// instruction set; the synchronous read is this design's choice.
module tb_instr_mem;
  localparam int D = 32768;
  logic clk = 0, wr_en;
  logic [14:0] rd_addr, wr_addr;
  logic [31:0] rd_data, wr_data;
  int checks = 0, failures = 0;
  logic [31:0] ref_m [int];

  instr_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int addrs[64];
    wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < 64; i++) begin
      addrs[i] = (i < 2) ? (i * (D-1)) : int'($urandom % D);
      @(negedge clk); wr_en = 1; wr_addr = 15'(addrs[i]); wr_data = $urandom;
      ref_m[addrs[i]] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 64; i++) begin
      rd_addr = 15'(addrs[i]);
      @(posedge clk); #1;
      rd_addr = 15'(addrs[(i+1)%64]);   // new address must not show before the edge
      #1;
      checks++; if (rd_data !== ref_m[addrs[i]]) begin failures++; $display("addr %0d", addrs[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
