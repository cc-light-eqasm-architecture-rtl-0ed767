// alu -- arithmetic/logic unit and comparator of the eQASM core.
//
// Combinational.  `op` selects ADD (rs + rt), SUB (rs - rt), AND, OR, XOR and
// NOT (~rt).  Independently, the twelve comparison flags of CMP are computed
// from the same operands, bit i of `flags` being the flag with code i of
// eqasm_pkg::cflag_e.  Following the CMP operation definition, the ordered
// flags compare Rt against Rs (LTU = unsigned(Rt) < unsigned(Rs), LT the
// signed version, and so on).  SUB follows the operation definition
// Rs + ~Rt + 1 = Rs - Rt (the prose of the SUB entry words it the other way
// round).
module alu
  import eqasm_pkg::*;
(
  input  alu_op_e           op,
  input  logic [XLEN-1:0]   rs,
  input  logic [XLEN-1:0]   rt,
  output logic [XLEN-1:0]   result,
  output logic [NCFLAGS-1:0] flags
);
  always_comb begin
    unique case (op)
      ALU_ADD: result = rs + rt;
      ALU_SUB: result = rs + ~rt + 32'd1;
      ALU_AND: result = rs & rt;
      ALU_OR:  result = rs | rt;
      ALU_XOR: result = rs ^ rt;
      ALU_NOT: result = ~rt;
      default: result = '0;
    endcase
  end

  always_comb begin
    flags            = '0;
    flags[CF_ALWAYS] = 1'b1;
    flags[CF_NEVER]  = 1'b0;
    flags[CF_EQ]     = (rt == rs);
    flags[CF_NE]     = (rt != rs);
    flags[CF_LTU]    = (rt <  rs);
    flags[CF_GEU]    = (rt >= rs);
    flags[CF_LEU]    = (rt <= rs);
    flags[CF_GTU]    = (rt >  rs);
    flags[CF_LT]     = ($signed(rt) <  $signed(rs));
    flags[CF_GE]     = ($signed(rt) >= $signed(rs));
    flags[CF_LE]     = ($signed(rt) <= $signed(rs));
    flags[CF_GT]     = ($signed(rt) >  $signed(rs));
  end
endmodule
