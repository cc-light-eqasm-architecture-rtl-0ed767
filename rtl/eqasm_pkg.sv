// eqasm_pkg -- shared constants and types of the CC-Light eQASM processor.
//
// Holds the instruction-word layout (single-format and quantum-bundle words),
// the 6-bit major opcodes, the 4-bit comparison-flag codes, the control-store
// entry of the microcode unit and the event record kept in the per-qubit event
// queues.  Widths that follow the specification: 32 GPRs of 32 bits, 7 qubits,
// 32 S and 32 T target registers (7-bit and 16-bit masks), 9-bit quantum
// opcodes, 3-bit PI, 20-bit wait intervals, 17-bit byte PC.
//
// Choices of this design, not of the specification:
//  * QWAIT/QWAITR: the specification prints the same 7-bit prefix 0100000 for
//    QWAIT and SMIS, which makes the two undecodable.  SMIS keeps the printed
//    code; QWAIT and QWAITR use 0110000 / 0110001, the codes of the CC-Light
//    assembler.  All opcodes are localparams here and can be changed in one place.
//  * The numeric codes of the comparison flags are not given; they are numbered
//    in the order of the comparison-flag table (ALWAYS=0, NEVER=1, EQ=2, ...).
//  * Codewords are 8 bits wide (microwave codewords 1..127, flux 128..255).
//  * Timing labels are 8 bits wide and wrap around.
package eqasm_pkg;

  localparam int unsigned NQUBITS  = 7;   // seven-qubit processor
  localparam int unsigned NPAIRS   = 16;  // allowed qubit pairs
  localparam int unsigned XLEN     = 32;  // GPR width
  localparam int unsigned NGPR     = 32;
  localparam int unsigned NQOTR    = 32;  // S and T registers each
  localparam int unsigned PC_W     = 17;  // byte program counter
  localparam int unsigned QOP_W    = 9;   // quantum opcode
  localparam int unsigned CW_W     = 8;   // codeword
  localparam int unsigned WAIT_W   = 20;  // QWAIT interval
  localparam int unsigned LABEL_W  = 8;   // timing label

  typedef logic [QOP_W-1:0]   qop_t;
  typedef logic [CW_W-1:0]    cw_t;
  typedef logic [WAIT_W-1:0]  wait_t;
  typedef logic [LABEL_W-1:0] label_t;

  // 6-bit major opcodes, instruction bits [30:25] (bit 31 = 0 for single format)
  localparam logic [5:0] OP_NOP    = 6'b000000;
  localparam logic [5:0] OP_BR     = 6'b000001;
  localparam logic [5:0] OP_STOP   = 6'b001000;
  localparam logic [5:0] OP_LD     = 6'b001001;
  localparam logic [5:0] OP_ST     = 6'b001010;
  localparam logic [5:0] OP_CMP    = 6'b001101;
  localparam logic [5:0] OP_FBR    = 6'b010100;
  localparam logic [5:0] OP_FMR    = 6'b010101;
  localparam logic [5:0] OP_LDI    = 6'b010110;
  localparam logic [5:0] OP_LDUI   = 6'b010111;
  localparam logic [5:0] OP_OR     = 6'b011000;
  localparam logic [5:0] OP_XOR    = 6'b011001;
  localparam logic [5:0] OP_AND    = 6'b011010;
  localparam logic [5:0] OP_NOT    = 6'b011011;
  localparam logic [5:0] OP_ADD    = 6'b011110;
  localparam logic [5:0] OP_SUB    = 6'b011111;
  localparam logic [5:0] OP_SMIS   = 6'b100000;
  localparam logic [5:0] OP_SMIT   = 6'b101000;
  localparam logic [5:0] OP_QWAIT  = 6'b110000;
  localparam logic [5:0] OP_QWAITR = 6'b110001;

  // ALU operations
  typedef enum logic [2:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_NOT
  } alu_op_e;

  // comparison-flag codes (4-bit comp_flag field of BR and FBR)
  typedef enum logic [3:0] {
    CF_ALWAYS = 4'd0,  CF_NEVER = 4'd1,
    CF_EQ     = 4'd2,  CF_NE    = 4'd3,
    CF_LTU    = 4'd4,  CF_GEU   = 4'd5,
    CF_LEU    = 4'd6,  CF_GTU   = 4'd7,
    CF_LT     = 4'd8,  CF_GE    = 4'd9,
    CF_LE     = 4'd10, CF_GT    = 4'd11
  } cflag_e;
  localparam int unsigned NCFLAGS = 12;

  // execution-flag selectors (which of the four per-qubit flags gates an op)
  localparam logic [1:0] XF_ALWAYS = 2'd0;  // unconditional
  localparam logic [1:0] XF_ONE    = 2'd1;  // last result was |1>
  localparam logic [1:0] XF_ZERO   = 2'd2;  // last result was |0>
  localparam logic [1:0] XF_SAME   = 2'd3;  // last two results equal

  // control-store entry of the microcode unit
  typedef struct packed {
    logic       two_qubit;  // operand is a T register (else an S register)
    logic       is_meas;    // operation is a measurement
    logic [1:0] cond;       // execution flag that gates the operation
    cw_t        cw_src;     // codeword for a single-qubit op / pair source
    cw_t        cw_tgt;     // codeword for the pair target qubit
    logic [3:0] dly2;       // second codeword this many cycles later (0: none)
    cw_t        cw2_src;    // second codeword, single-qubit op / pair source
    cw_t        cw2_tgt;    // second codeword, pair target
  } ucode_t;

  // one operation waiting in a qubit's event queue
  typedef struct packed {
    label_t     label;
    cw_t        cw;
    logic [1:0] cond;
    logic       is_meas;
    logic [3:0] dly2;       // second codeword dly2 cycles after the first (0: none)
    cw_t        cw2;
  } event_t;

  // allowed qubit pairs, index = bit of the T mask: {source, target}
  // (read from the pair-numbering drawing of the seven-qubit chip)
  function automatic logic [5:0] pair_of(input int unsigned p);
    case (p)
      0:  return {3'd2, 3'd0};   1:  return {3'd0, 3'd3};
      2:  return {3'd3, 3'd1};   3:  return {3'd1, 3'd4};
      4:  return {3'd2, 3'd5};   5:  return {3'd5, 3'd3};
      6:  return {3'd3, 3'd6};   7:  return {3'd6, 3'd4};
      8:  return {3'd0, 3'd2};   9:  return {3'd3, 3'd0};
      10: return {3'd1, 3'd3};   11: return {3'd4, 3'd1};
      12: return {3'd5, 3'd2};   13: return {3'd3, 3'd5};
      14: return {3'd6, 3'd3};   default: return {3'd4, 3'd6};
    endcase
  endfunction

endpackage
