// tb_alu -- self-checking test of the ALU and comparator: random and corner
// operands, all six operations and all twelve comparison flags against
// reference values computed with 64-bit integer arithmetic.
//
// The ALU is combinational: operands are applied, the outputs are sampled
// 1 time unit later, no clock.  The reference follows the operation
// definitions of the instruction set (SUB = Rs - Rt; the ordered flags
// compare Rt against Rs); flag codes follow the order of the flag table,
// which is this design's numbering.  Ends with a TB_RESULT line; a watchdog
// stops a hung run.
module tb_alu;
  import eqasm_pkg::*;
  alu_op_e op;
  logic [31:0] rs, rt, result;
  logic [NCFLAGS-1:0] flags;
  int checks = 0, failures = 0;

  alu dut (.*);

  function automatic logic [31:0] ref_res(alu_op_e o, logic [31:0] a, logic [31:0] b);
    longint unsigned s;
    case (o)
      ALU_ADD: begin s = longint'(a) + longint'(b); return s[31:0]; end
      ALU_SUB: begin s = longint'(a) - longint'(b); return s[31:0]; end
      ALU_AND: return a & b;
      ALU_OR:  return a | b;
      ALU_XOR: return a ^ b;
      default: return ~b;
    endcase
  endfunction

  task automatic one(logic [31:0] a, logic [31:0] b);
    longint ua, ub, sa, sb;
    logic [11:0] exp;
    rs = a; rt = b;
    ua = longint'(a); ub = longint'(b);
    sa = longint'($signed(a)); sb = longint'($signed(b));
    exp = '0;
    exp[0]  = 1;            exp[1]  = 0;
    exp[2]  = (ub == ua);   exp[3]  = (ub != ua);
    exp[4]  = (ub <  ua);   exp[5]  = (ub >= ua);
    exp[6]  = (ub <= ua);   exp[7]  = (ub >  ua);
    exp[8]  = (sb <  sa);   exp[9]  = (sb >= sa);
    exp[10] = (sb <= sa);   exp[11] = (sb >  sa);
    for (int k = 0; k < 6; k++) begin
      op = alu_op_e'(k); #1;
      checks++; if (result !== ref_res(op, a, b)) begin failures++; $display("op %0d %h %h -> %h", k, a, b, result); end
    end
    checks++; if (flags !== exp) begin failures++; $display("flags %h %h -> %b exp %b", a, b, flags, exp); end
  endtask

  initial begin
    one(0, 0); one(1, 2); one(2, 1); one(32'hFFFFFFFF, 1); one(1, 32'hFFFFFFFF);
    one(32'h80000000, 32'h7FFFFFFF); one(32'h7FFFFFFF, 32'h80000000);
    for (int n = 0; n < 500; n++) begin
      logic [31:0] a;
      a = $urandom;
      one(a, (n % 5 == 0) ? a : $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
