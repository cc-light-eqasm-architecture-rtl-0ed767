// tb_data_mem -- self-checking test of the dual-port data memory: core-port
// and host-port writes and reads, each seen from the other port, one-cycle
// read latency, port-A priority on a same-address write.
//
// Drives both ports at negative clock edges and checks read data after the
// next rising edge (one-cycle read latency), against a reference array.  The
// dual-port organisation and the port-A priority are this design's choices;
// the instruction set only gives word loads and stores.
module tb_data_mem;
  logic clk = 0;
  logic a_en, a_we, b_en, b_we;
  logic [9:0] a_addr, b_addr;
  logic [31:0] a_wdata, a_rdata, b_wdata, b_rdata;
  logic [31:0] model [1024];
  logic [1023:0] known;
  int checks = 0, failures = 0;

  data_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic ea, eb;
    logic [31:0] xa, xb;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    known = '0;
    for (int i = 0; i < 64; i++) begin    // initialise a window of words
      @(negedge clk); b_en = 1; b_we = 1; b_addr = 10'(i); b_wdata = $urandom;
      model[i] = b_wdata; known[i] = 1;
    end
    @(negedge clk); b_en = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      a_en = $urandom % 2; a_we = $urandom % 2; a_addr = 10'($urandom % 64); a_wdata = $urandom;
      b_en = $urandom % 2; b_we = $urandom % 2; b_addr = 10'($urandom % 64); b_wdata = $urandom;
      if (n % 7 == 0) begin a_en = 1; a_we = 1; b_en = 1; b_we = 1; b_addr = a_addr; end
      ea = a_en && !a_we; eb = b_en && !b_we;
      xa = model[a_addr]; xb = model[b_addr];
      @(posedge clk);
      if (b_en && b_we) model[b_addr] = b_wdata;
      if (a_en && a_we) model[a_addr] = a_wdata;
      #1;
      if (ea) begin checks++; if (a_rdata !== xa) failures++; end
      if (eb) begin checks++; if (b_rdata !== xb) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
