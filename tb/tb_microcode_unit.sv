// tb_microcode_unit -- self-checking test of the control store: configure all
// 512 entries with random contents, read them back through both ports.
//
// One entry is configured per clock cycle; reads are combinational and are
// checked one time unit after the opcodes change.  The 512 entries follow
// from the 9-bit opcode field; the entry format (including the optional
// second codeword) is this design's own.
module tb_microcode_unit;
  import eqasm_pkg::*;
  logic clk = 0, cfg_we;
  logic [8:0] cfg_addr;
  ucode_t cfg_data;
  logic [1:0][8:0] opcode;
  ucode_t [1:0] entry;
  ucode_t model [512];
  int checks = 0, failures = 0;

  microcode_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_data = '0; opcode = '0;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 9'(i); cfg_data = ucode_t'({$urandom, $urandom});
      model[i] = cfg_data;
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 600; n++) begin
      opcode[0] = 9'($urandom); opcode[1] = 9'($urandom); #1;
      checks++; if (entry[0] !== model[opcode[0]]) failures++;
      checks++; if (entry[1] !== model[opcode[1]]) failures++;
    end
    // reconfigure one entry and read it in the next cycle
    @(negedge clk); cfg_we = 1; cfg_addr = 9'h81; cfg_data = '{two_qubit:1, is_meas:0, cond:2'd3, cw_src:8'h81, cw_tgt:8'h82, default:'0};
    @(negedge clk); cfg_we = 0; opcode[0] = 9'h81; #1;
    checks++; if (entry[0].cw_tgt !== 8'h82 || entry[0].two_qubit !== 1 || entry[0].cond !== 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
